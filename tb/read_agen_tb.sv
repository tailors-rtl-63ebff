// read_agen_tb: self-checking test of the child-side address generator.
//
// A behavioural Tailor holds word(i) at tile index i, answers a read one cycle
// after it fires and stalls reads at random. The generator must read 0..len-1
// in order for every pass, hand each word to the consumer with its index and
// pass, then issue one Shrink(len) and pulse done. With no stalls a tile of
// len elements and P passes must take len*P read cycles plus one shrink cycle.
module read_agen_tb;
  import tailors_pkg::*;

  localparam int TW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic          cmd_valid, cmd_ready, rd_valid, rd_ready, rd_resp_valid, shr_valid, shr_ready;
  logic          out_valid, done;
  logic [TW-1:0] cmd_len, rd_idx, shr_num, out_idx;
  logic [15:0]   cmd_passes, out_pass;
  logic [31:0]   rd_resp_data, out_data;

  read_agen #(.DATA_W(32), .TIDX_W(TW)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_len, .cmd_passes, .cmd_ready,
    .rd_valid, .rd_idx, .rd_ready, .rd_resp_valid, .rd_resp_data,
    .shr_valid, .shr_num, .shr_ready, .out_valid, .out_data, .out_idx, .out_pass, .done);

  function automatic logic [31:0] word(input logic [TW-1:0] i);
    return i * 32'h0101_0007 + 32'h55;
  endfunction

  bit stall_en;
  always_ff @(posedge clk) begin
    if (!rst_n) begin rd_ready <= 0; rd_resp_valid <= 0; rd_resp_data <= '0; end
    else begin
      rd_ready      <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
      rd_resp_valid <= rd_valid && rd_ready;
      rd_resp_data  <= word(rd_idx);
    end
  end
  assign shr_ready = 1'b1;

  int exp_rd, exp_idx, exp_pass, nout, nshr, ndone;
  logic [TW-1:0] cur_len;
  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      chk(rd_idx == TW'(exp_rd), $sformatf("read index %0d exp %0d", rd_idx, exp_rd));
      exp_rd = (exp_rd == int'(cur_len) - 1) ? 0 : exp_rd + 1;
    end
    if (out_valid) begin
      chk(out_idx == TW'(exp_idx) && out_pass == 16'(exp_pass) && out_data == word(out_idx),
          $sformatf("out idx %0d pass %0d", out_idx, out_pass));
      nout++;
      if (exp_idx == int'(cur_len) - 1) begin exp_idx = 0; exp_pass++; end else exp_idx++;
    end
    if (shr_valid && shr_ready) begin
      nshr++;
      chk(shr_num == cur_len, "shrink frees the whole tile");
    end
    if (done) ndone++;
  end

  task automatic run(input int len, input int passes, input bit stall, output int cycles);
    int t0;
    stall_en = stall; exp_rd = 0; exp_idx = 0; exp_pass = 0; nout = 0; nshr = 0; ndone = 0;
    cur_len = TW'(len);
    @(negedge clk); cmd_valid = 1; cmd_len = TW'(len); cmd_passes = 16'(passes);
    #1 chk(cmd_ready, "idle before command");
    t0 = int'($time / 10);
    @(negedge clk); cmd_valid = 0;
    wait (ndone == 1);
    cycles = int'($time / 10) - t0;
    @(negedge clk); @(negedge clk);
    chk(nout == len * passes, $sformatf("%0d words out, exp %0d", nout, len * passes));
    chk(nshr == 1, "one shrink");
    chk(cmd_ready, "idle after done");
  endtask

  initial begin
    int cyc;
    cmd_valid = 0; cmd_len = 0; cmd_passes = 0; stall_en = 0; cur_len = 0;
    exp_rd = 0; exp_idx = 0; exp_pass = 0; nout = 0; nshr = 0; ndone = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run(7, 3, 0, cyc);
    chk(cyc == 7 * 3 + 1, $sformatf("no-stall tile took %0d cycles, exp %0d", cyc, 7 * 3 + 1));
    run(1, 1, 0, cyc);
    chk(cyc == 2, $sformatf("one-element tile took %0d cycles", cyc));
    for (int t = 0; t < 5; t++) run($urandom_range(2, 40), $urandom_range(1, 4), 1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
