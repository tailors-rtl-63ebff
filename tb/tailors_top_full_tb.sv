// tailors_top_full_tb: one complete operation of the hierarchy at its default
// sizes (global buffer 3,932,160 words and PE buffer 16,384 words per operand,
// FIFO regions of 64 entries). Operand A's 20,000-word tile fits the global
// buffer, but its first 17,000-word subtile overbooks the PE buffer and is read
// twice; operand B's 3,000-word tile fits everywhere. In a second operation
// operand A's tile is 1,000 words larger than the global buffer, so the
// global-level Tailor overbooks, while its 16,384-word subtiles fit the PE buffer.
// Every word handed to the PE datapath is compared, in order, with the DRAM
// word the schedule says it must be. The test counts how often each
// mechanism occurred (overbooking, FIFO overwrite, read stall, tile release,
// at each level) and fails any that never did.
// Every cycle it also checks that a level in buffet mode has occupancy plus
// credits equal to its capacity, that an overbooked level is full with no
// credits, and that every PE buffer offset read lies inside the PE buffer; it
// requires that the parent of each level wrapped round to re-stream a bumped
// part at least once.
module tailors_top_full_tb;
  import tailors_pkg::*;

  localparam int TW = 32;
  localparam int NOPS = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic      [NOPS-1:0]         start, busy, done;
  tile_cfg_t [NOPS-1:0]         cfg;
  logic      [NOPS-1:0]         dreq_v, dreq_r, dresp_v, pe_v;
  logic      [NOPS-1:0][TW-1:0] dreq_a, pe_idx;
  logic      [NOPS-1:0][31:0]   dresp_d, pe_d;
  logic      [NOPS-1:0][15:0]   pe_pass;
  tl_event_t [NOPS-1:0]         glb_ev, pe_ev;
  tl_mode_e  [NOPS-1:0]         glb_mode, pe_mode;
  logic      [NOPS-1:0][TW-1:0] pe_boff, g_occ, g_cred, g_foff, p_occ, p_cred, p_foff;
  logic      [NOPS-1:0]         g_rest, p_rest, p_upd_r;

  tailors_top dut (
    .clk, .rst_n, .cfg_glb_fifo_size(TW'(64)), .cfg_pe_fifo_size(TW'(64)),
    .start, .cfg, .busy, .done,
    .dram_req_valid(dreq_v), .dram_req_addr(dreq_a), .dram_req_ready(dreq_r),
    .dram_resp_valid(dresp_v), .dram_resp_data(dresp_d),
    .pe_out_valid(pe_v), .pe_out_data(pe_d), .pe_out_idx(pe_idx), .pe_out_pass(pe_pass),
    .pe_out_boff(pe_boff),
    .pe_upd_valid('0), .pe_upd_idx('0), .pe_upd_data('0), .pe_upd_ready(p_upd_r),
    .glb_ev, .pe_ev, .glb_mode, .pe_mode,
    .glb_occupancy(g_occ), .glb_credits(g_cred), .glb_fifo_offset(g_foff),
    .pe_occupancy(p_occ), .pe_credits(p_cred), .pe_fifo_offset(p_foff),
    .glb_restream(g_rest), .pe_restream(p_rest));

  for (genvar o = 0; o < NOPS; o++) begin : g_dram
    dram_model #(.AW(TW), .DW(32), .LAT(6), .SEED(o + 1)) u_dram (
      .clk, .rst_n, .req_valid(dreq_v[o]), .req_addr(dreq_a[o]), .req_ready(dreq_r[o]),
      .resp_valid(dresp_v[o]), .resp_data(dresp_d[o]));
  end

  function automatic logic [31:0] dword(input int o, input int a);
    return 32'(a) * 32'h2545_F491 + 32'(o + 1) * 32'h0001_0001;
  endfunction

  // expected PE stream per operand
  int exp_a[NOPS][$];
  task automatic plan(input int o, input tile_cfg_t c);
    for (int g = 0; g < int'(c.glb_passes); g++)
      for (int k = 0; k < int'(c.glb_len); k += int'(c.pe_len)) begin
        int l;
        l = (int'(c.glb_len) - k < int'(c.pe_len)) ? int'(c.glb_len) - k : int'(c.pe_len);
        for (int p = 0; p < int'(c.pe_passes); p++)
          for (int i = 0; i < l; i++) exp_a[o].push_back(int'(c.dram_base) + k + i);
      end
  endtask

  int n_out[NOPS];
  int n_glb_ob, n_glb_ovw, n_pe_ob, n_pe_ovw, n_glb_stall, n_pe_stall, n_glb_done, n_pe_done;
  int n_glb_fill, n_pe_fill, n_glb_rest, n_pe_rest;
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NOPS; o++) begin
      if (pe_v[o]) begin
        n_out[o]++;
        if (exp_a[o].size() == 0) chk(0, $sformatf("operand %0d: extra word", o));
        else begin
          int a;
          a = exp_a[o].pop_front();
          chk(pe_d[o] == dword(o, a),
              $sformatf("operand %0d word %0d: %h exp DRAM[%0d]=%h", o, n_out[o], pe_d[o], a, dword(o, a)));
        end
      end
      n_glb_ob    += int'(glb_ev[o].owfill_init);
      n_glb_ovw   += int'(glb_ev[o].ow_overwrite);
      n_pe_ob     += int'(pe_ev[o].owfill_init);
      n_pe_ovw    += int'(pe_ev[o].ow_overwrite);
      n_glb_stall += int'(glb_ev[o].rd_stall);
      n_pe_stall  += int'(pe_ev[o].rd_stall);
      n_glb_done  += int'(glb_ev[o].tile_done);
      n_pe_done   += int'(pe_ev[o].tile_done);
      n_glb_fill  += int'(glb_ev[o].fill);
      n_pe_fill   += int'(pe_ev[o].fill);
      n_glb_rest  += int'(g_rest[o]);
      n_pe_rest   += int'(p_rest[o]);
      // credits are the free slots of a buffet; an overbooked buffer is full
      if (glb_mode[o] == TL_NORMAL && g_occ[o] + g_cred[o] != TW'(GLB_CAP_DEF))
        chk(0, $sformatf("operand %0d: global occupancy %0d + credits %0d", o, g_occ[o], g_cred[o]));
      if (pe_mode[o] == TL_NORMAL && p_occ[o] + p_cred[o] != TW'(PE_CAP_DEF))
        chk(0, $sformatf("operand %0d: PE occupancy %0d + credits %0d", o, p_occ[o], p_cred[o]));
      if (glb_mode[o] == TL_OVERBOOK && (g_cred[o] != 0 || g_occ[o] != TW'(GLB_CAP_DEF)))
        chk(0, $sformatf("operand %0d: overbooked global buffer not full", o));
      if (pe_mode[o] == TL_OVERBOOK && (p_cred[o] != 0 || p_occ[o] != TW'(PE_CAP_DEF)))
        chk(0, $sformatf("operand %0d: overbooked PE buffer not full", o));
      if (pe_v[o] && pe_boff[o] >= TW'(PE_CAP_DEF))
        chk(0, $sformatf("operand %0d: buffer offset %0d out of range", o, pe_boff[o]));
    end
  end

  function automatic tile_cfg_t mk(input int db, input int gl, input int pl, input int gp, input int pp);
    tile_cfg_t c;
    c.dram_base = TW'(db); c.glb_len = TW'(gl); c.pe_len = TW'(pl);
    c.glb_passes = 16'(gp); c.pe_passes = 16'(pp);
    return c;
  endfunction

  task automatic run(input tile_cfg_t ca, input tile_cfg_t cb);
    bit [NOPS-1:0] seen;
    plan(0, ca); plan(1, cb);
    @(negedge clk);
    cfg[0] = ca; cfg[1] = cb; start = '1;
    @(negedge clk); start = '0;
    seen = '0;
    while (seen != '1) begin
      @(negedge clk);
      seen |= done;
    end
    repeat (4) @(negedge clk);
    for (int o = 0; o < NOPS; o++) begin
      chk(exp_a[o].size() == 0, $sformatf("operand %0d: %0d words missing", o, exp_a[o].size()));
      chk(glb_mode[o] == TL_NORMAL && pe_mode[o] == TL_NORMAL && !busy[o], "levels idle after the tile");
    end
  endtask

  initial begin
    start = '0; cfg = '0;
    n_out = '{default: 0};
    {n_glb_ob, n_glb_ovw, n_pe_ob, n_pe_ovw, n_glb_stall, n_pe_stall, n_glb_done, n_pe_done} = '0;
    {n_glb_fill, n_pe_fill, n_glb_rest, n_pe_rest} = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(mk(4096, 20000, 17000, 1, 2), mk(123, 3000, 1000, 1, 1));
    // a tile 1,000 words larger than the global buffer
    run(mk(0, GLB_CAP_DEF + 1000, PE_CAP_DEF, 1, 1), mk(9, 100, 100, 1, 1));
    $display("mechanisms: glb overbook=%0d overwrite=%0d stall=%0d done=%0d | pe overbook=%0d overwrite=%0d stall=%0d done=%0d",
             n_glb_ob, n_glb_ovw, n_glb_stall, n_glb_done, n_pe_ob, n_pe_ovw, n_pe_stall, n_pe_done);
    chk(n_pe_ob > 0, "PE buffer overbooked");
    chk(n_pe_ovw > 0, "PE FIFO entries overwritten");
    chk(n_pe_stall > 0, "PE reads stalled on missing data");
    chk(n_glb_ob > 0, "global buffer overbooked");
    chk(n_glb_rest > 0 && n_pe_rest > 0, "bumped parts re-streamed at both levels");
    chk(n_glb_ovw > 0, "global-buffer FIFO entries overwritten");
    chk(n_glb_done == 4, $sformatf("global tiles released %0d", n_glb_done));
    chk(n_pe_done == 2 + 3 + 241 + 1, $sformatf("PE subtiles released %0d", n_pe_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
