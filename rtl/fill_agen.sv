// fill_agen: parent-side address generator that pushes one tile into a child
// Tailor, element by element.
//
// A command gives the parent address of the tile's element 0 and the tile
// length. For each tile index the generator reads the parent (a memory or the
// read port of a parent-level Tailor) and pushes the returned word into the
// child as a fill, tagged with its tile index and a last flag on the final
// element. The child decides whether that push is a buffet fill or an
// overwriting fill. One cycle after the last element is accepted the
// generator looks at the child: if the child is still streaming (overbooked, or
// waiting to backfill after a shrink) it wraps to the child's restart index and
// streams the bumped part of the tile again; otherwise the tile is complete.
// Either way the generator becomes free again only when the child reports that
// the whole tile has been shrunk away (tile_done), and it drops any element it
// still holds at that moment.
//
// Following the paper: fills are pushed by the parent, and the bumped part of
// an overbooked tile is streamed repeatedly from the parent. This design's own
// choices: one parent read outstanding at a time (request, response, push), so
// a tile element takes at least three cycles plus the parent's latency; the
// parent responds in order and never drops a request.
//
// Timing: cmd, preq and fill are valid/ready handshakes on the rising edge;
// presp_valid is a one-cycle pulse carrying the word of the last request.
module fill_agen
  import tailors_pkg::*;
#(
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned TIDX_W = TIDX_W_DEF,
  parameter int unsigned ADDR_W = TIDX_W_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  // tile command
  input  logic              cmd_valid,
  input  logic [ADDR_W-1:0] cmd_base,
  input  logic [TIDX_W-1:0] cmd_len,
  output logic              cmd_ready,
  // parent read port
  output logic              preq_valid,
  output logic [ADDR_W-1:0] preq_addr,
  input  logic              preq_ready,
  input  logic              presp_valid,
  input  logic [DATA_W-1:0] presp_data,
  // child Tailor fill port and status
  output logic              fill_valid,
  output logic [DATA_W-1:0] fill_data,
  output logic [TIDX_W-1:0] fill_idx,
  output logic              fill_last,
  input  logic              fill_ready,
  input  logic              tl_streaming,
  input  logic [TIDX_W-1:0] tl_restart_idx,
  input  logic              tl_tile_done,
  // one pulse per element pushed, one per wrap to the restart index
  output logic              ev_push,
  output logic              ev_wrap
);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_PUSH, S_CHECK, S_HOLD, S_DRAIN} state_e;

  state_e            st_q;
  logic [ADDR_W-1:0] base_q;
  logic [TIDX_W-1:0] len_q, idx_q;
  logic [DATA_W-1:0] data_q;

  assign cmd_ready  = (st_q == S_IDLE);
  assign preq_valid = (st_q == S_REQ);
  assign preq_addr  = base_q + ADDR_W'(idx_q);
  assign fill_valid = (st_q == S_PUSH);
  assign fill_data  = data_q;
  assign fill_idx   = idx_q;
  assign fill_last  = (idx_q == len_q - 1'b1);
  assign ev_push    = fill_valid && fill_ready;
  assign ev_wrap    = (st_q == S_CHECK) && tl_streaming;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      base_q <= '0;
      len_q  <= '0;
      idx_q  <= '0;
      data_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (cmd_valid) begin
          base_q <= cmd_base;
          len_q  <= cmd_len;
          idx_q  <= '0;
          st_q   <= (cmd_len == '0) ? S_IDLE : S_REQ;
        end
        S_REQ: begin
          if (tl_tile_done)    st_q <= S_IDLE;
          else if (preq_ready) st_q <= S_WAIT;
        end
        S_WAIT: if (presp_valid) begin
          data_q <= presp_data;
          st_q   <= tl_tile_done ? S_IDLE : S_PUSH;
        end else if (tl_tile_done) begin
          st_q <= S_DRAIN;
        end
        S_PUSH: begin
          if (tl_tile_done) begin
            st_q <= S_IDLE;
          end else if (fill_ready) begin
            if (fill_last) begin
              st_q <= S_CHECK;
            end else begin
              idx_q <= idx_q + 1'b1;
              st_q  <= S_REQ;
            end
          end
        end
        S_CHECK: begin
          if (tl_tile_done) begin
            st_q <= S_IDLE;
          end else if (tl_streaming) begin
            idx_q <= tl_restart_idx;
            st_q  <= S_REQ;
          end else begin
            st_q <= S_HOLD;
          end
        end
        S_HOLD:  if (tl_tile_done) st_q <= S_IDLE;
        S_DRAIN: if (presp_valid)  st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // the restart index always lies inside the tile
  a_restart_in_tile: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == S_CHECK && tl_streaming && !tl_tile_done) |-> (tl_restart_idx < len_q));

endmodule
