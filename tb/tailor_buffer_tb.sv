// tailor_buffer_tb: self-checking test of the Tailor buffer.
//
// Part 1 replays the worked example of a 4-entry Tailor with a 2-entry FIFO
// region on the 6-element tile a..f: Fill(d), Read(3), OWFill(e), Read(4),
// OWFill(f), Read(5), Read(0), Read(1), OWFill(c), Read(2), OWFill(d), checking
// the data, the buffer offset of every read and the FIFO offset after every
// step (expected values 3; 2; 2,2; 2; 2,3; 2,0; 2,1; 3; 3,3; 0).
// Part 2 checks plain buffet behaviour on a 16-entry Tailor: credits, a read
// that stalls until its element is filled, Update, a partial Shrink and the
// rolled head, and tile_done.
// Part 3 streams random tiles longer than the buffer through it with a parent
// that wraps to restart_idx and a reader that scans the tile several times,
// including a shrink while overbooked that forces a backfill. Every word read
// is compared with the word the parent sent for that tile index.
module tailor_buffer_tb;
  import tailors_pkg::*;

  localparam int TW = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- DUT 1: the worked example ----------------
  logic          a_fv, a_fl, a_fr, a_rv, a_rr, a_rrv, a_uv, a_ur, a_sv, a_sr, a_str;
  logic [7:0]    a_fd, a_rd, a_ud;
  logic [TW-1:0] a_fi, a_ri, a_boff, a_ui, a_sn, a_occ, a_cr, a_foff, a_rst;
  tl_mode_e      a_mode;
  tl_event_t     a_ev;

  tailor_buffer #(.DATA_W(8), .CAP(4), .MAX_FIFO(2), .TIDX_W(TW)) u_fig (
    .clk, .rst_n, .cfg_fifo_size(TW'(2)),
    .fill_valid(a_fv), .fill_data(a_fd), .fill_idx(a_fi), .fill_last(a_fl), .fill_ready(a_fr),
    .rd_valid(a_rv), .rd_idx(a_ri), .rd_ready(a_rr), .rd_resp_valid(a_rrv), .rd_resp_data(a_rd),
    .rd_resp_boff(a_boff), .upd_valid(a_uv), .upd_idx(a_ui), .upd_data(a_ud), .upd_ready(a_ur),
    .shr_valid(a_sv), .shr_num(a_sn), .shr_ready(a_sr), .mode(a_mode), .occupancy(a_occ),
    .credits(a_cr), .fifo_offset(a_foff), .streaming(a_str), .restart_idx(a_rst), .ev(a_ev));

  task automatic a_fill(input byte d, input int idx, input bit last);
    @(negedge clk); a_fv = 1; a_fd = d; a_fi = TW'(idx); a_fl = last; #1;
    do @(negedge clk); while (!a_ffire);
    a_fv = 0;
  endtask

  task automatic a_read(input int idx, input byte exp_d, input int exp_boff, input int exp_foff);
    @(negedge clk); a_rv = 1; a_ri = TW'(idx); #1;
    do @(negedge clk); while (!a_rfire);
    a_rv = 0;
    chk(a_rrv && a_rd == exp_d, $sformatf("fig read(%0d) data %c exp %c", idx, a_rd, exp_d));
    chk(a_boff == TW'(exp_boff), $sformatf("fig read(%0d) buffer offset %0d exp %0d", idx, a_boff, exp_boff));
    chk(a_foff == TW'(exp_foff), $sformatf("fig read(%0d) fifo offset %0d exp %0d", idx, a_foff, exp_foff));
  endtask

  // ---------------- DUT 2: buffet and streaming ----------------
  localparam int CAP2 = 16, F2 = 4;
  logic          b_fv, b_fl, b_fr, b_rv, b_rr, b_rrv, b_uv, b_ur, b_sv, b_sr, b_str;
  logic [31:0]   b_fd, b_rd, b_ud;
  logic [TW-1:0] b_fi, b_ri, b_boff, b_ui, b_sn, b_occ, b_cr, b_foff, b_rst;
  tl_mode_e      b_mode;
  tl_event_t     b_ev;

  tailor_buffer #(.DATA_W(32), .CAP(CAP2), .MAX_FIFO(F2), .TIDX_W(TW)) u_str (
    .clk, .rst_n, .cfg_fifo_size(TW'(F2)),
    .fill_valid(b_fv), .fill_data(b_fd), .fill_idx(b_fi), .fill_last(b_fl), .fill_ready(b_fr),
    .rd_valid(b_rv), .rd_idx(b_ri), .rd_ready(b_rr), .rd_resp_valid(b_rrv), .rd_resp_data(b_rd),
    .rd_resp_boff(b_boff), .upd_valid(b_uv), .upd_idx(b_ui), .upd_data(b_ud), .upd_ready(b_ur),
    .shr_valid(b_sv), .shr_num(b_sn), .shr_ready(b_sr), .mode(b_mode), .occupancy(b_occ),
    .credits(b_cr), .fifo_offset(b_foff), .streaming(b_str), .restart_idx(b_rst), .ev(b_ev));

  function automatic logic [31:0] word(input int tile, input int idx);
    return 32'(tile * 1000003 + idx * 7919 + 17);
  endfunction

  task automatic b_fill(input logic [31:0] d, input int idx, input bit last);
    @(negedge clk); b_fv = 1; b_fd = d; b_fi = TW'(idx); b_fl = last; #1;
    do @(negedge clk); while (!b_ffire);
    b_fv = 0;
  endtask

  task automatic b_read(input int idx, output logic [31:0] d);
    @(negedge clk); b_rv = 1; b_ri = TW'(idx); #1;
    do @(negedge clk); while (!b_rfire);
    b_rv = 0;
    chk(b_rrv, "read response valid one cycle after the read");
    d = b_rd;
  endtask

  task automatic b_shrink(input int n);
    @(negedge clk); b_sv = 1; b_sn = TW'(n);
    @(negedge clk); b_sv = 0;
  endtask

  // handshake monitors: set when the handshake fired at the last rising edge
  logic a_ffire = 0, a_rfire = 0, b_ffire = 0, b_rfire = 0;
  always @(posedge clk) begin
    a_ffire <= a_fv && a_fr;
    a_rfire <= a_rv && a_rr;
    b_ffire <= b_fv && b_fr;
    b_rfire <= b_rv && b_rr;
    if (b_ev.tile_done) parent_stop <= 1'b1;
  end

  int n_ow, n_owinit, n_overwrite, n_discard, n_shrink_ob, n_done;
  always @(posedge clk) if (rst_n) begin
    n_ow        += int'(b_ev.owfill);
    n_owinit    += int'(b_ev.owfill_init);
    n_overwrite += int'(b_ev.ow_overwrite);
    n_discard   += int'(b_ev.discard);
    n_shrink_ob += int'(b_ev.shrink_ob);
    n_done      += int'(b_ev.tile_done);
  end

  // parent: streams tile `tile` of length len, wraps while the Tailor streams
  bit parent_stop;
  task automatic parent(input int tile, input int len);
    int idx = 0;
    while (!parent_stop) begin
      @(negedge clk);
      if (parent_stop) break;
      b_fv = 1; b_fd = word(tile, idx); b_fi = TW'(idx); b_fl = (idx == len - 1); #1;
      do @(negedge clk); while (!b_ffire && !parent_stop);
      // parent_stop is set at the rising edge where the tile is shrunk away
      b_fv = 0;
      if (!b_ffire) break;
      if (idx == len - 1) begin
        if (!b_str) break;          // the tile fitted
        idx = int'(b_rst);
      end else idx++;
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
  endtask

  // reader: `passes` scans, optional shrink of `shr` after the first pass
  task automatic reader(input int tile, input int len, input int passes, input int shr);
    logic [31:0] d;
    int base = 0;
    for (int p = 0; p < passes; p++) begin
      for (int i = 0; i < len - base; i++) begin
        b_read(i, d);
        chk(d == word(tile, i + base),
            $sformatf("tile %0d pass %0d index %0d: %h exp %h", tile, p, i, d, word(tile, i + base)));
      end
      if (p == 0 && shr > 0) begin
        b_shrink(shr);
        base = shr;
      end
    end
    b_shrink(len - base);
  endtask

  logic [31:0] d;
  initial begin
    {a_fv, a_rv, a_uv, a_sv, b_fv, b_rv, b_uv, b_sv} = '0;
    a_fd = 0; a_fi = 0; a_fl = 0; a_ri = 0; a_ui = 0; a_ud = 0; a_sn = 0;
    b_fd = 0; b_fi = 0; b_fl = 0; b_ri = 0; b_ui = 0; b_ud = 0; b_sn = 0;
    n_ow = 0; n_owinit = 0; n_overwrite = 0; n_discard = 0; n_shrink_ob = 0; n_done = 0;
    parent_stop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ===== Part 1: worked example =====
    a_fill("a", 0, 0); a_fill("b", 1, 0); a_fill("c", 2, 0);
    a_fill("d", 3, 0);                                   // step 1
    chk(a_cr == 0 && a_mode == TL_NORMAL, "full buffet has no credits");
    @(negedge clk); a_fv = 1; a_fd = "e"; a_fi = 4; a_fl = 0; #1;
    chk(!a_fr, "overwriting fill waits until the tail has been read");
    @(negedge clk); a_fv = 0;
    a_read(2, "c", 2, 0);
    a_read(3, "d", 3, 0);                                // step 2
    a_fill("e", 4, 0);                                   // step 3
    chk(a_mode == TL_OVERBOOK && a_foff == 2, $sformatf("OWFill(e): fifo offset %0d exp 2", a_foff));
    a_read(4, "e", 2, 2);                                // step 4
    a_fill("f", 5, 1);                                   // step 5
    chk(a_foff == 2, $sformatf("OWFill(f): fifo offset %0d exp 2", a_foff));
    chk(a_str && a_rst == 2, "parent wraps to the FIFO head");
    a_read(5, "f", 3, 2);                                // step 6
    a_read(0, "a", 0, 2);                                // step 7
    a_read(1, "b", 1, 2);                                // step 8
    a_fill("c", 2, 0);                                   // step 9
    chk(a_foff == 3, $sformatf("OWFill(c): fifo offset %0d exp 3", a_foff));
    a_read(2, "c", 3, 3);                                // step 10
    a_fill("d", 3, 0);                                   // step 11
    chk(a_foff == 0, $sformatf("OWFill(d): fifo offset %0d exp 0", a_foff));
    a_read(3, "d", 3, 0);
    // e (index 4) is no longer resident: the read must stall
    @(negedge clk); a_rv = 1; a_ri = 4; #1;
    repeat (3) begin @(negedge clk); chk(!a_rr, "read of bumped index 4 stalls"); end
    a_rv = 0;
    @(negedge clk); a_sv = 1; a_sn = 6;
    @(negedge clk); a_sv = 0;
    chk(a_mode == TL_NORMAL && a_occ == 0 && a_cr == 4, "whole-tile shrink empties the Tailor");

    // ===== Part 2: buffet behaviour =====
    for (int i = 0; i < 3; i++) b_fill(word(9, i), i, 0);
    chk(b_cr == TW'(CAP2 - 3) && b_occ == 3, "credits after 3 fills");
    @(negedge clk); b_uv = 1; b_ui = 1; b_ud = 32'hDEAD_BEEF; #1;
    chk(b_ur, "update of resident index accepted");
    @(negedge clk); b_uv = 0;
    b_read(1, d); chk(d == 32'hDEAD_BEEF, "read after update");
    fork
      begin b_read(5, d); chk(d == word(9, 5), "stalled read returns the filled word"); end
      begin
        repeat (4) begin @(negedge clk); #2; chk(!b_rr, "read beyond occupancy stalls"); end
        for (int i = 3; i < 8; i++) b_fill(word(9, i), i, i == 7);
      end
    join
    b_shrink(2);
    chk(b_occ == 6 && b_cr == TW'(CAP2 - 6), "partial shrink returns credits");
    b_read(0, d); chk(d == word(9, 2), "index 0 after shrink(2) is old index 2");
    b_read(5, d); chk(d == word(9, 7), "index 5 after shrink(2) is old index 7");
    b_shrink(6);
    chk(n_done == 1 && b_occ == 0, "tile_done after shrinking the rest");

    // ===== Part 3: overbooked tiles =====
    for (int t = 0; t < 6; t++) begin
      int len, passes, shr;
      len    = (t == 0) ? CAP2 - 2 : $urandom_range(CAP2 + 1, 3 * CAP2);
      passes = $urandom_range(2, 3);
      shr    = (t >= 3) ? $urandom_range(1, CAP2 - F2) : 0;
      parent_stop = 0;
      fork
        parent(100 + t, len);
        reader(100 + t, len, passes, shr);
      join
      @(negedge clk);
      chk(b_mode == TL_NORMAL && b_occ == 0, $sformatf("tile %0d fully released", t));
    end
    chk(n_owinit >= 5, $sformatf("overbooked tiles: %0d", n_owinit));
    chk(n_overwrite > 0, "FIFO entries were overwritten");
    chk(n_shrink_ob >= 3, "shrinks while overbooked happened");
    chk(n_discard > 0 || n_shrink_ob > 0, "backfill path used");
    chk(n_done == 7, $sformatf("tile_done count %0d", n_done));
    $display("events: owfill=%0d init=%0d overwrite=%0d discard=%0d shrink_ob=%0d",
             n_ow, n_owinit, n_overwrite, n_discard, n_shrink_ob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
