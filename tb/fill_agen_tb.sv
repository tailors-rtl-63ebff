// fill_agen_tb: self-checking test of the parent-side address generator.
//
// The parent is a behavioural memory with a random response latency and a
// random request stall; the child is a scripted stand-in for a Tailor with a
// random fill_ready. Three tiles are sent: one that fits (the child never
// streams), one that overbooks (the child streams and asks for a restart at a
// fixed index, then ends the tile after a set number of pushes) and one that
// is ended by tile_done while a parent read is outstanding. Every push is
// compared with the expected tile index, last flag and memory word, and the
// generator must not accept a new command before tile_done.
module fill_agen_tb;
  import tailors_pkg::*;

  localparam int TW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic          cmd_valid, cmd_ready, preq_valid, preq_ready, presp_valid;
  logic [TW-1:0] cmd_base, cmd_len, preq_addr, fill_idx, restart;
  logic [31:0]   presp_data, fill_data;
  logic          fill_valid, fill_last, fill_ready, streaming, tile_done, ev_push, ev_wrap;

  fill_agen #(.DATA_W(32), .TIDX_W(TW), .ADDR_W(TW)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_base, .cmd_len, .cmd_ready,
    .preq_valid, .preq_addr, .preq_ready, .presp_valid, .presp_data,
    .fill_valid, .fill_data, .fill_idx, .fill_last, .fill_ready,
    .tl_streaming(streaming), .tl_restart_idx(restart), .tl_tile_done(tile_done),
    .ev_push, .ev_wrap);

  function automatic logic [31:0] mword(input logic [TW-1:0] a);
    return a * 32'h9E37_79B9 + 32'h1234;
  endfunction

  // parent memory: accepts a request with a random stall, answers after 1..4 cycles
  int lat;
  logic pending;
  logic [TW-1:0] paddr;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending <= 0; presp_valid <= 0; lat <= 0; preq_ready <= 0; presp_data <= '0; paddr <= '0;
    end else begin
      presp_valid <= 0;
      preq_ready  <= ($urandom_range(0, 2) != 0);
      if (preq_valid && preq_ready) begin
        pending <= 1; paddr <= preq_addr; lat <= $urandom_range(0, 3);
      end else if (pending) begin
        if (lat == 0) begin
          presp_valid <= 1; presp_data <= mword(paddr); pending <= 0;
        end else lat <= lat - 1;
      end
    end
  end

  // child: random ready; checks pushes against the expected sequence
  int exp_q[$];
  int pushes, wraps;
  logic [TW-1:0] cur_base, cur_len;
  always_ff @(posedge clk) begin
    if (!rst_n) fill_ready <= 0;
    else        fill_ready <= ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (fill_valid && fill_ready) begin
      int e;
      pushes++;
      if (exp_q.size() == 0) begin
        chk(0, $sformatf("unexpected push of index %0d", fill_idx));
      end else begin
        e = exp_q.pop_front();
        chk(fill_idx == TW'(e), $sformatf("push index %0d exp %0d", fill_idx, e));
        chk(fill_last == (TW'(e) == cur_len - 1), "last flag");
        chk(fill_data == mword(cur_base + TW'(e)), $sformatf("push data of index %0d", e));
      end
    end
    if (ev_wrap) wraps++;
  end

  task automatic send_cmd(input int base, input int len);
    cur_base = TW'(base); cur_len = TW'(len);
    @(negedge clk); cmd_valid = 1; cmd_base = TW'(base); cmd_len = TW'(len);
    #1 chk(cmd_ready, "generator idle before a new tile");
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic pulse_done();
    @(negedge clk); tile_done = 1;
    @(negedge clk); tile_done = 0;
  endtask

  initial begin
    cmd_valid = 0; cmd_base = 0; cmd_len = 0; streaming = 0; restart = 0; tile_done = 0;
    pushes = 0; wraps = 0; cur_base = 0; cur_len = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // tile 1: fits
    for (int i = 0; i < 10; i++) exp_q.push_back(i);
    send_cmd(100, 10);
    wait (exp_q.size() == 0);
    repeat (20) @(negedge clk);
    chk(!cmd_ready && !fill_valid && !preq_valid, "holds after the last element until tile_done");
    chk(pushes == 10, $sformatf("tile 1 pushes %0d", pushes));
    pulse_done();
    @(negedge clk);
    chk(cmd_ready, "idle after tile_done");

    // tile 2: overbooked, restart at 6, three extra rounds then tile_done
    pushes = 0;
    streaming = 1; restart = 6;
    for (int i = 0; i < 12; i++) exp_q.push_back(i);
    for (int r = 0; r < 3; r++) for (int i = 6; i < 12; i++) exp_q.push_back(i);
    send_cmd(5000, 12);
    wait (exp_q.size() == 0);
    @(negedge clk);
    pulse_done();
    streaming = 0;
    repeat (10) @(negedge clk);
    chk(cmd_ready, "idle after tile_done while streaming");
    chk(pushes == 12 + 18, $sformatf("tile 2 pushes %0d", pushes));
    chk(wraps >= 3, $sformatf("wraps %0d", wraps));

    // tile 3: ended with a read outstanding; the late response must be dropped
    pushes = 0;
    for (int i = 0; i < 3; i++) exp_q.push_back(i);
    send_cmd(77, 50);
    wait (exp_q.size() == 0);
    wait (preq_valid && preq_ready);
    @(negedge clk);
    pulse_done();
    repeat (12) @(negedge clk);
    chk(cmd_ready && !fill_valid, "tile_done aborts and drains the outstanding read");
    chk(pushes == 3, $sformatf("tile 3 pushes %0d", pushes));

    // throughput: one element takes at least request + response + push cycles
    begin
      int t0, t1;
      for (int i = 0; i < 4; i++) exp_q.push_back(i);
      pushes = 0;
      t0 = $time / 10;
      send_cmd(0, 4);
      wait (exp_q.size() == 0);
      t1 = $time / 10;
      chk(t1 - t0 >= 4 * 3, $sformatf("4 elements in %0d cycles", t1 - t0));
      @(negedge clk); pulse_done();
    end

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
