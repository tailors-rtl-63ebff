// tailor_buffer: a Tailor (tail-overbooked buffer), i.e. a buffet extended with
// the overwriting fill so that a tile larger than the buffer can still be used.
//
// Buffet behaviour (mode TL_NORMAL). The storage is a circular queue with a
// head pointer. Fill appends at the tail while credits (free slots) remain;
// Read(index) and Update(index,data) address the tile relative to the head and
// stall until the element is present; Shrink(num) drops num elements from the
// head and returns num credits.
//
// Overbooking (mode TL_OVERBOOK). When the buffer is full and the parent still
// delivers elements of the same tile, the element is taken as an overwriting
// fill. The first one splits the buffer: logical offsets [0, H) stay a
// buffet-managed region, with H = CAP - fifo_size the FIFO head, and offsets
// [H, CAP) become the FIFO-managed region. That region is emptied in one step and
// receives the first bumped element (tile index CAP). Later overwriting fills
// append until the region is full, then replace its least recent entry. The
// region is a rolling buffer: f_roll is the slot of the least recent entry and
// f_base its tile index. The FIFO offset f_base - H is what an index in the
// FIFO region is corrected by: an index i >= H is resident when its cyclic
// distance d from f_base over the streamed part [H, L) of the tile is below the
// number of entries; it then sits at logical offset H + d (the "buffer offset")
// and physical region slot (f_roll + d) mod fifo_size. Indices below H are used
// as they are. The parent streams the bumped part [H, L) of the tile again and
// again; restart_idx tells it where to wrap to after the tile's last element.
//
// Shrink while overbooked. The FIFO region is dropped, the buffet-managed region
// loses num elements at the head and the Tailor enters TL_BACKFILL: it skips
// streamed elements until the one following the kept data comes round, then
// fills normally (and overbooks again if the buffer fills up once more).
//
// What follows the paper: the four buffet operations and credits, the overwriting
// fill only when the buffer is full, the FIFO region at the tail with a
// configurable size, the FIFO head / FIFO offset / buffer offset arithmetic of
// the paper's worked example, and backfill after a shrink that starts only when
// the stream reaches data after the buffet-managed region.
// This design's own choices:
//  * FIFO offset is kept as (index of least recent FIFO entry) - FIFO head, the
//    definition the paper's worked example uses for every step; the sentence
//    that resets it on a read of the buffet region is not followed.
//  * An overwriting fill may replace a FIFO entry only after that entry has been
//    read once, and the first overwriting fill waits until index CAP-1 has been
//    read. This keeps a sequential (scan) reader from losing data. Both waits
//    end early while a read is stalled on an element that is not resident:
//    the window must then move on for the reader to make progress, and what it
//    passes over is streamed again. Without this, two overbooked levels in a
//    row could wait on each other.
//  * The parent sends the tile index and a last flag with every element; the
//    index is used only to find the backfill point, the flag to learn the tile
//    length L. One tile is held at a time; tile_done pulses when it is shrunk away.
//  * A shrink takes the whole cycle: fills, reads and updates wait.
//  * One write port: a fill wins over an update in the same cycle.
//
// Timing: every handshake is valid/ready and fires on the rising clock edge.
// Read data and its buffer offset appear one cycle after the read fires.
// Reset is synchronous and active low; the data array itself is not reset.
module tailor_buffer
  import tailors_pkg::*;
#(
  parameter int unsigned DATA_W   = DATA_W_DEF,
  parameter int unsigned CAP      = PE_CAP_DEF,
  parameter int unsigned MAX_FIFO = MAX_FIFO_DEF,
  parameter int unsigned TIDX_W   = TIDX_W_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration: size of the FIFO-managed region, 1..MAX_FIFO, below CAP
  input  logic [TIDX_W-1:0] cfg_fifo_size,
  // Fill / overwriting fill, from the parent
  input  logic              fill_valid,
  input  logic [DATA_W-1:0] fill_data,
  input  logic [TIDX_W-1:0] fill_idx,     // index of the element in its tile
  input  logic              fill_last,    // last element of the tile
  output logic              fill_ready,
  // Read(index), from the child
  input  logic              rd_valid,
  input  logic [TIDX_W-1:0] rd_idx,
  output logic              rd_ready,
  output logic              rd_resp_valid,
  output logic [DATA_W-1:0] rd_resp_data,
  output logic [TIDX_W-1:0] rd_resp_boff, // logical buffer offset that was read
  // Update(index, data), from the child
  input  logic              upd_valid,
  input  logic [TIDX_W-1:0] upd_idx,
  input  logic [DATA_W-1:0] upd_data,
  output logic              upd_ready,
  // Shrink(num), from the child's address generator
  input  logic              shr_valid,
  input  logic [TIDX_W-1:0] shr_num,
  output logic              shr_ready,
  // status
  output tl_mode_e          mode,
  output logic [TIDX_W-1:0] occupancy,
  output logic [TIDX_W-1:0] credits,
  output logic [TIDX_W-1:0] fifo_offset,
  output logic              streaming,    // parent must keep cycling the bumped part
  output logic [TIDX_W-1:0] restart_idx,  // tile index the parent wraps to
  output tl_event_t         ev
);

  localparam int unsigned AW = (CAP > 1) ? $clog2(CAP) : 1;
  localparam int unsigned FW = (MAX_FIFO > 1) ? $clog2(MAX_FIFO) : 1;
  localparam logic [TIDX_W-1:0] CAP_T = TIDX_W'(CAP);

  logic [DATA_W-1:0] mem [CAP];

  // ---------------- state ----------------
  tl_mode_e          mode_q;
  logic [AW-1:0]     hp_q;        // physical slot of logical offset 0
  logic [TIDX_W-1:0] occ_q;       // filled elements from the head (CAP while overbooked)
  logic [TIDX_W-1:0] tile_base_q; // tile index of current index 0
  logic              last_seen_q; // tile length known
  logic [TIDX_W-1:0] len_q;       // tile length in current numbering, when known
  logic              tail_read_q; // index CAP-1 read while full
  logic [TIDX_W-1:0] f_base_q;    // index of least recent FIFO entry
  logic [TIDX_W-1:0] f_next_q;    // index of the next streamed element
  logic [TIDX_W-1:0] f_cnt_q;     // entries in the FIFO region
  logic [TIDX_W-1:0] f_roll_q;    // region slot of the least recent entry
  logic [MAX_FIFO-1:0] rdbit_q;   // entry read since written

  logic [TIDX_W-1:0] fsz, fhead;
  assign fsz   = cfg_fifo_size;
  assign fhead = CAP_T - cfg_fifo_size;

  // logical offset -> physical slot
  function automatic logic [AW-1:0] phys(input logic [AW-1:0] hp, input logic [TIDX_W-1:0] lo);
    logic [TIDX_W:0] s;
    s = {1'b0, TIDX_W'(hp)} + {1'b0, lo};
    if (s >= {1'b0, CAP_T}) s = s - {1'b0, CAP_T};
    return AW'(s);
  endfunction

  // (a + b) mod fsz for a, b < fsz
  function automatic logic [TIDX_W-1:0] fmod(input logic [TIDX_W-1:0] a, input logic [TIDX_W-1:0] b,
                                             input logic [TIDX_W-1:0] m);
    logic [TIDX_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, m}) s = s - {1'b0, m};
    return s[TIDX_W-1:0];
  endfunction

  // Where does tile index idx live? res: resident; lo: logical offset;
  // inf: it is in the FIFO region; fs: its region slot.
  function automatic void locate(input logic [TIDX_W-1:0] idx, output logic res,
                                 output logic [TIDX_W-1:0] lo, output logic inf,
                                 output logic [TIDX_W-1:0] fs);
    logic [TIDX_W-1:0] d;
    logic              dv;
    res = 1'b0; lo = idx; inf = 1'b0; fs = '0; d = '0; dv = 1'b0;
    if (mode_q != TL_OVERBOOK) begin
      res = (idx < occ_q);
    end else if (idx < fhead) begin
      res = 1'b1;
    end else begin
      inf = 1'b1;
      if (idx >= f_base_q) begin
        d  = idx - f_base_q;
        dv = 1'b1;
      end else if (last_seen_q) begin
        d  = idx - f_base_q + (len_q - fhead);   // rolled over the end of the tile
        dv = 1'b1;
      end
      if (last_seen_q && idx >= len_q) dv = 1'b0;
      res = dv && (d < f_cnt_q);
      lo  = fhead + d;
      fs  = fmod(f_roll_q, d, fsz);
    end
  endfunction

  // ---------------- combinational control ----------------
  logic              rd_res, rd_inf, upd_res, upd_inf;
  logic [TIDX_W-1:0] rd_lo, rd_fs, upd_lo, upd_fs;
  logic              fill_fire, rd_fire, upd_fire, shr_fire;
  logic              ow_slot_free;
  logic [TIDX_W-1:0] bf_rel;      // fill_idx in current numbering

  always_comb begin
    locate(rd_idx,  rd_res,  rd_lo,  rd_inf,  rd_fs);
    locate(upd_idx, upd_res, upd_lo, upd_inf, upd_fs);
  end

  // A read waiting for an element that is not resident needs the FIFO window
  // to move on, so it releases the read-before-overwrite rule: entries it
  // skips come round again with the next cycle of the stream.
  logic rd_waits;
  assign rd_waits     = rd_valid && !rd_res;
  assign bf_rel       = fill_idx - tile_base_q;
  assign ow_slot_free = (f_cnt_q < fsz) || rdbit_q[FW'(f_roll_q)] || rd_waits;

  always_comb begin
    fill_ready = 1'b0;
    if (!shr_valid) begin
      unique case (mode_q)
        TL_NORMAL:   fill_ready = (occ_q < CAP_T) || tail_read_q || rd_waits;
        TL_OVERBOOK: fill_ready = ow_slot_free;
        TL_BACKFILL: fill_ready = 1'b1;
        default:     fill_ready = 1'b0;
      endcase
    end
  end

  assign shr_ready = 1'b1;
  assign shr_fire  = shr_valid;
  assign fill_fire = fill_valid && fill_ready;
  assign rd_ready  = !shr_valid && rd_res;
  assign rd_fire   = rd_valid && rd_ready;
  assign upd_ready = !shr_valid && !fill_fire && upd_res;
  assign upd_fire  = upd_valid && upd_ready;

  // kind of fill
  logic fill_buffet, fill_owinit, fill_ow, fill_discard;
  always_comb begin
    fill_buffet  = 1'b0;
    fill_owinit  = 1'b0;
    fill_ow      = 1'b0;
    fill_discard = 1'b0;
    if (fill_fire) begin
      unique case (mode_q)
        TL_NORMAL:   if (occ_q < CAP_T) fill_buffet = 1'b1; else fill_owinit = 1'b1;
        TL_OVERBOOK: fill_ow = 1'b1;
        TL_BACKFILL: if (bf_rel == occ_q) fill_buffet = 1'b1; else fill_discard = 1'b1;
        default: ;
      endcase
    end
  end

  // write port: fill has priority over update
  logic              wr_en;
  logic [AW-1:0]     wr_addr;
  logic [DATA_W-1:0] wr_data;
  logic [TIDX_W-1:0] ow_slot;     // region slot written by an overwriting fill
  always_comb begin
    ow_slot = (f_cnt_q < fsz) ? fmod(f_roll_q, f_cnt_q, fsz) : f_roll_q;
    wr_en   = 1'b0;
    wr_addr = '0;
    wr_data = fill_data;
    if (fill_buffet) begin
      wr_en   = 1'b1;
      wr_addr = phys(hp_q, occ_q);
    end else if (fill_owinit) begin
      wr_en   = 1'b1;
      wr_addr = phys(hp_q, fhead);
    end else if (fill_ow) begin
      wr_en   = 1'b1;
      wr_addr = phys(hp_q, fhead + ow_slot);
    end else if (upd_fire) begin
      wr_en   = 1'b1;
      wr_addr = phys(hp_q, upd_inf ? fhead + upd_fs : upd_lo);
      wr_data = upd_data;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  // read port
  always_ff @(posedge clk) begin
    if (rd_fire) begin
      rd_resp_data <= mem[phys(hp_q, rd_inf ? fhead + rd_fs : rd_lo)];
      rd_resp_boff <= rd_lo;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_resp_valid <= 1'b0;
    else        rd_resp_valid <= rd_fire;
  end

  // ---------------- state update ----------------
  logic [TIDX_W-1:0] shr_keep;   // buffet-region elements kept by a shrink while overbooked
  assign shr_keep = (shr_num < fhead) ? fhead - shr_num : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode_q      <= TL_NORMAL;
      hp_q        <= '0;
      occ_q       <= '0;
      tile_base_q <= '0;
      last_seen_q <= 1'b0;
      len_q       <= '0;
      tail_read_q <= 1'b0;
      f_base_q    <= '0;
      f_next_q    <= '0;
      f_cnt_q     <= '0;
      f_roll_q    <= '0;
      rdbit_q     <= '0;
    end else if (shr_fire) begin
      tail_read_q <= 1'b0;
      if (last_seen_q && shr_num >= len_q) begin
        // the whole tile is gone: ready for the next one
        mode_q      <= TL_NORMAL;
        hp_q        <= '0;
        occ_q       <= '0;
        tile_base_q <= '0;
        last_seen_q <= 1'b0;
        len_q       <= '0;
        f_cnt_q     <= '0;
      end else begin
        tile_base_q <= tile_base_q + shr_num;
        if (last_seen_q) len_q <= len_q - shr_num;
        if (mode_q == TL_OVERBOOK) begin
          mode_q  <= TL_BACKFILL;
          hp_q    <= phys(hp_q, fhead - shr_keep);
          occ_q   <= shr_keep;
          f_cnt_q <= '0;
        end else begin
          hp_q    <= phys(hp_q, shr_num);
          occ_q   <= occ_q - shr_num;
        end
      end
    end else begin
      if (rd_fire && mode_q == TL_NORMAL && occ_q == CAP_T && rd_idx == CAP_T - 1)
        tail_read_q <= 1'b1;
      if (rd_fire && rd_inf) rdbit_q[FW'(rd_fs)] <= 1'b1;

      if (fill_buffet) begin
        occ_q <= occ_q + 1'b1;
        if (fill_last) begin
          last_seen_q <= 1'b1;
          len_q       <= occ_q + 1'b1;
        end
        if (mode_q == TL_BACKFILL) mode_q <= TL_NORMAL;
      end
      if (fill_owinit) begin
        mode_q      <= TL_OVERBOOK;
        tail_read_q <= 1'b0;
        f_base_q    <= CAP_T;
        f_cnt_q     <= TIDX_W'(1);
        f_roll_q    <= '0;
        rdbit_q     <= '0;
        f_next_q    <= fill_last ? fhead : CAP_T + 1'b1;
        if (fill_last) begin
          last_seen_q <= 1'b1;
          len_q       <= CAP_T + 1'b1;
        end
      end
      if (fill_ow) begin
        rdbit_q[FW'(ow_slot)] <= 1'b0;
        if (f_cnt_q < fsz) begin
          f_cnt_q <= f_cnt_q + 1'b1;
        end else begin
          f_roll_q <= fmod(f_roll_q, TIDX_W'(1), fsz);
          // least recent entry moves on, rolling over the end of the tile
          if (last_seen_q && f_base_q + 1'b1 >= len_q)
            f_base_q <= fhead;
          else
            f_base_q <= f_base_q + 1'b1;
        end
        f_next_q <= fill_last ? fhead : f_next_q + 1'b1;
        if (fill_last) begin
          last_seen_q <= 1'b1;
          len_q       <= f_next_q + 1'b1;
        end
      end
      if (fill_discard && fill_last && !last_seen_q) begin
        last_seen_q <= 1'b1;
        len_q       <= bf_rel + 1'b1;
      end
    end
  end

  // ---------------- outputs ----------------
  assign mode        = mode_q;
  assign occupancy   = occ_q;
  assign credits     = (mode_q == TL_OVERBOOK) ? '0 : CAP_T - occ_q;
  assign fifo_offset = (mode_q == TL_OVERBOOK) ? f_base_q - fhead : '0;
  assign streaming   = (mode_q != TL_NORMAL);
  assign restart_idx = tile_base_q + ((mode_q == TL_OVERBOOK) ? fhead : occ_q);

  always_comb begin
    ev              = '0;
    ev.fill         = fill_buffet;
    ev.owfill_init  = fill_owinit;
    ev.owfill       = fill_ow;
    ev.ow_overwrite = fill_ow && (f_cnt_q >= fsz);
    ev.discard      = fill_discard;
    ev.shrink       = shr_fire;
    ev.shrink_ob    = shr_fire && (mode_q == TL_OVERBOOK);
    ev.tile_done    = shr_fire && last_seen_q && (shr_num >= len_q);
    ev.rd_stall     = rd_valid && !rd_ready;
  end

  // ---------------- protocol checks ----------------
  // overwriting fills only happen on a full buffer
  a_ow_only_full: assert property (@(posedge clk) disable iff (!rst_n)
    (fill_owinit || fill_ow) |-> (occ_q == CAP_T));
  // the parent streams the bumped part in order
  a_ow_index: assert property (@(posedge clk) disable iff (!rst_n)
    fill_ow |-> (bf_rel == f_next_q));
  // a shrink never frees more than the tile holds
  a_shrink_range: assert property (@(posedge clk) disable iff (!rst_n)
    (shr_fire && mode_q != TL_OVERBOOK) |-> (shr_num <= occ_q));
  // the FIFO region is a proper part of the buffer
  a_fifo_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    (fill_owinit || fill_ow) |-> (fsz >= 1 && fsz <= TIDX_W'(MAX_FIFO) && fsz < CAP_T));

endmodule
