// tailors_workload_tb: runs the hierarchy on miniature versions of the two
// kinds of sparse matrices the design is meant for, tiled the overbooking way.
//
// The bench generates two 256x256 matrices in place of real data sets:
//   banded  - a system of linear equations: a dense band around the diagonal
//             (|i-j| <= 3, each entry present with probability 5/8) plus rare
//             nonzeros elsewhere (1 in 512);
//   graph   - a scattered matrix with hub rows and columns: 1 in 64 entries
//             present, and 1 in 4 in every 29th row and column.
// Each is cut into square tiles of a uniform shape. A compressed tile takes two
// words per nonzero (coordinate and value). The tile side is the multiple of 4
// for which the share of non-empty tiles holding more words than the global
// buffer (GLB_CAP = 256 words here) comes closest to 10%: the tiles are
// deliberately sized so that about one in ten overbooks, the target rate of
// the overbooking method. The bench picks the side by trying them all, which
// stands in for the sampling-based tile-size selection done offline. The computation is A x A^T, so operand A receives the
// tiles of A in row-block order and operand B the tiles of A^T in
// column-block order, one pair at a time. Each global tile is traversed twice,
// and each of its PE subtiles (PE_CAP = 64 words, so subtiles always fit) twice.
//
// Checks: every word handed to the PE datapath, against the DRAM word the
// schedule names; the number of global-buffer overbookings, which must equal
// the number of tiles whose size exceeds the global buffer; tile releases at
// both levels; and that overbooking did occur.
module tailors_workload_tb;
  import tailors_pkg::*;

  localparam int TW      = 32;
  localparam int NOPS    = 2;
  localparam int N       = 256;
  localparam int GCAP    = 256;
  localparam int PCAP    = 64;
  localparam int Y_PCT   = 10;
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

  tailors_top #(.GLB_CAP(GCAP), .PE_CAP(PCAP), .MAX_FIFO(8)) dut (
    .clk, .rst_n, .cfg_glb_fifo_size(TW'(8)), .cfg_pe_fifo_size(TW'(4)),
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

  // ---------------- matrix and tiling ----------------
  bit nz[N][N];

  task automatic gen(input int kind);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int d;
        d = (i > j) ? i - j : j - i;
        if (kind == 0)
          nz[i][j] = (d <= 3) ? ($urandom_range(0, 7) < 5) : ($urandom_range(0, 511) == 0);
        else if (i % 29 == 0 || j % 29 == 0)
          nz[i][j] = ($urandom_range(0, 3) == 0);
        else
          nz[i][j] = ($urandom_range(0, 63) == 0);
      end
  endtask

  // words of the compressed tile (row block r, column block c) of side s
  function automatic int tile_words(input int s, input int r, input int c);
    int n = 0;
    for (int i = r * s; i < (r + 1) * s && i < N; i++)
      for (int j = c * s; j < (c + 1) * s && j < N; j++)
        n += int'(nz[i][j]);
    return 2 * n;
  endfunction

  // tile sizes in the order each operand receives them (empty tiles skipped)
  int tiles_a[$], tiles_b[$];
  task automatic cut(input int s);
    int nb;
    nb = (N + s - 1) / s;
    tiles_a.delete(); tiles_b.delete();
    for (int r = 0; r < nb; r++)
      for (int c = 0; c < nb; c++) begin
        int w;
        w = tile_words(s, r, c);              // tile (r, c) of A
        if (w > 0) tiles_a.push_back(w);
      end
    for (int c = 0; c < nb; c++)
      for (int r = 0; r < nb; r++) begin
        int w;
        w = tile_words(s, r, c);              // tile (c, r) of A^T holds A's (r, c)
        if (w > 0) tiles_b.push_back(w);
      end
  endtask

  function automatic int n_over(input int q[$]);
    int n = 0;
    foreach (q[i]) n += int'(q[i] > GCAP);
    return n;
  endfunction

  // ---------------- scoreboard ----------------
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

  int n_glb_ob, n_glb_done, n_pe_done, n_words;
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NOPS; o++) begin
      if (pe_v[o]) begin
        n_words++;
        if (exp_a[o].size() == 0) chk(0, $sformatf("operand %0d: extra word", o));
        else begin
          int a;
          a = exp_a[o].pop_front();
          chk(pe_d[o] == dword(o, a),
              $sformatf("operand %0d: %h exp DRAM[%0d]=%h", o, pe_d[o], a, dword(o, a)));
        end
      end
      n_glb_ob   += int'(glb_ev[o].owfill_init);
      n_glb_done += int'(glb_ev[o].tile_done);
      n_pe_done  += int'(pe_ev[o].tile_done);
    end
  end

  function automatic tile_cfg_t mk(input int db, input int gl);
    tile_cfg_t c;
    c.dram_base = TW'(db); c.glb_len = TW'(gl); c.pe_len = TW'(PCAP);
    c.glb_passes = 16'd2; c.pe_passes = 16'd2;
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
    repeat (2) @(negedge clk);
  endtask

  int total_ob;

  task automatic workload(input int kind, input string name);
    int s, best, base_a, base_b, ob0, pe0, gd0, ntl, exp_pe;
    gen(kind);
    // the side (multiple of 4) whose share of overbooked tiles is closest to
    // Y_PCT%, the larger side on a tie
    s = 4; best = 1 << 30;
    for (int t = 4; t <= 128; t += 4) begin
      int err;
      cut(t);
      err = n_over(tiles_a) * 100 - Y_PCT * tiles_a.size();
      err = ((err < 0) ? -err : err) * 1000 / tiles_a.size();
      if (err <= best) begin best = err; s = t; end
    end
    cut(s);
    chk(tiles_a.size() == tiles_b.size(), "A and A^T have as many non-empty tiles");
    $display("%s: tile %0dx%0d, %0d non-empty tiles, %0d of them larger than %0d words",
             name, s, s, tiles_a.size(), n_over(tiles_a), GCAP);
    ob0 = n_glb_ob; gd0 = n_glb_done; pe0 = n_pe_done;
    base_a = 0; base_b = 1 << 20; exp_pe = 0;
    ntl = tiles_a.size();
    for (int t = 0; t < ntl; t++) begin
      run(mk(base_a, tiles_a[t]), mk(base_b, tiles_b[t]));
      exp_pe += 2 * ((tiles_a[t] + PCAP - 1) / PCAP + (tiles_b[t] + PCAP - 1) / PCAP);
      base_a += tiles_a[t]; base_b += tiles_b[t];
    end
    for (int o = 0; o < NOPS; o++)
      chk(exp_a[o].size() == 0, $sformatf("%s operand %0d: %0d words missing", name, o, exp_a[o].size()));
    chk(n_glb_ob - ob0 == n_over(tiles_a) + n_over(tiles_b),
        $sformatf("%s: %0d global overbookings, expected %0d", name, n_glb_ob - ob0,
                  n_over(tiles_a) + n_over(tiles_b)));
    chk(n_glb_done - gd0 == 2 * ntl, $sformatf("%s: global tiles released %0d", name, n_glb_done - gd0));
    chk(n_pe_done - pe0 == exp_pe, $sformatf("%s: PE subtiles released %0d exp %0d", name, n_pe_done - pe0, exp_pe));
    total_ob += n_over(tiles_a) + n_over(tiles_b);
  endtask

  initial begin
    start = '0; cfg = '0;
    {n_glb_ob, n_glb_done, n_pe_done, n_words, total_ob} = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    workload(0, "banded");
    workload(1, "graph");
    chk(total_ob > 0, "some tiles overbooked the global buffer");
    $display("words delivered to the PEs: %0d, global overbookings: %0d", n_words, n_glb_ob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
