// tile_sequencer_tb: self-checking test of the tile sequencer.
//
// The address generators are scripted stand-ins with random ready and a random
// PE processing time. For a few schedules (tile length, subtile length,
// traversal counts) the test checks the global-buffer fill command, the exact
// list of PE subtile commands (base, length, passes), that no subtile starts
// before the previous one is done, and the final Shrink(glb_len) and done.
module tile_sequencer_tb;
  import tailors_pkg::*;

  localparam int TW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic          start, busy, done;
  tile_cfg_t     cfg;
  logic          glb_cmd_valid, glb_cmd_ready, glb_shr_valid, glb_shr_ready;
  logic          pef_cmd_valid, pef_cmd_ready, per_cmd_valid, per_cmd_ready, per_done;
  logic [TW-1:0] glb_cmd_base, glb_cmd_len, glb_shr_num, pef_cmd_base, pef_cmd_len, per_cmd_len;
  logic [15:0]   per_cmd_passes;

  tile_sequencer #(.TIDX_W(TW)) dut (.*);

  // PE side: busy for a random time after each subtile command
  int pe_busy;
  bit pe_active;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pe_busy <= 0; pe_active <= 0; per_done <= 0; glb_cmd_ready <= 0; glb_shr_ready <= 0;
    end else begin
      per_done      <= 0;
      glb_cmd_ready <= ($urandom_range(0, 1) != 0);
      glb_shr_ready <= ($urandom_range(0, 1) != 0);
      if (per_cmd_valid && per_cmd_ready) begin
        pe_active <= 1; pe_busy <= $urandom_range(1, 8);
      end else if (pe_active) begin
        if (pe_busy == 0) begin per_done <= 1; pe_active <= 0; end
        else pe_busy <= pe_busy - 1;
      end
    end
  end
  assign pef_cmd_ready = !pe_active;
  assign per_cmd_ready = !pe_active;

  int exp_base[$], exp_len[$];
  int nglb, nshr;
  logic [15:0] cur_pp;
  logic [TW-1:0] cur_gl, cur_db;
  always @(posedge clk) if (rst_n) begin
    if (glb_cmd_valid && glb_cmd_ready) begin
      nglb++;
      chk(glb_cmd_base == cur_db && glb_cmd_len == cur_gl, "global-buffer fill command");
    end
    if (pef_cmd_valid) begin
      chk(per_cmd_valid && pef_cmd_ready && per_cmd_ready, "PE fill and read start together");
      chk(nglb == 1, "subtile only after the global fill started");
      if (exp_base.size() == 0) chk(0, "unexpected subtile");
      else begin
        int b, l;
        b = exp_base.pop_front(); l = exp_len.pop_front();
        chk(pef_cmd_base == TW'(b) && pef_cmd_len == TW'(l) && per_cmd_len == TW'(l)
            && per_cmd_passes == cur_pp,
            $sformatf("subtile (%0d,%0d) exp (%0d,%0d)", pef_cmd_base, pef_cmd_len, b, l));
      end
    end
    if (glb_shr_valid && glb_shr_ready) begin
      nshr++;
      chk(glb_shr_num == cur_gl && exp_base.size() == 0, "shrink of the whole tile after all subtiles");
    end
  end

  task automatic run(input int db, input int gl, input int pl, input int gp, input int pp);
    nglb = 0; nshr = 0;
    cur_gl = TW'(gl); cur_db = TW'(db); cur_pp = 16'(pp);
    for (int g = 0; g < gp; g++)
      for (int k = 0; k < gl; k += pl) begin
        exp_base.push_back(k);
        exp_len.push_back((gl - k < pl) ? gl - k : pl);
      end
    @(negedge clk);
    cfg.dram_base = TW'(db); cfg.glb_len = TW'(gl); cfg.pe_len = TW'(pl);
    cfg.glb_passes = 16'(gp); cfg.pe_passes = 16'(pp);
    start = 1;
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    wait (done);
    @(negedge clk); @(negedge clk);
    chk(!busy && nshr == 1 && nglb == 1 && exp_base.size() == 0, "schedule complete");
  endtask

  initial begin
    start = 0; cfg = '0; nglb = 0; nshr = 0; cur_pp = 0; cur_gl = 0; cur_db = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1000, 10, 4, 2, 3);
    run(0, 16, 16, 1, 1);
    run(64, 5, 8, 3, 2);
    for (int t = 0; t < 4; t++)
      run($urandom_range(0, 9999), $urandom_range(1, 60), $urandom_range(1, 20),
          $urandom_range(1, 3), $urandom_range(1, 3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
