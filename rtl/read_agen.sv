// read_agen: child-side address generator. It traverses a tile held in a
// Tailor with Read(index) in a scan pattern, index 0 to len-1, for a given
// number of passes, forwards the returned words to the consumer (the PE
// datapath, or the next level), and then frees the tile with one Shrink(len).
//
// Following the paper: the child's address generator issues reads and drives
// shrinks, and the access pattern over a tile is a scan. This design's own
// choices: the traversal is dense over the tile's positions (the compressed
// tile is read in stored order), the pass count comes with the command, and the
// whole tile is shrunk at once after the last read.
//
// Timing: cmd, rd and shr are valid/ready handshakes on the rising edge. A read
// that the Tailor cannot serve yet (data not resident) simply waits. Read data
// come back from the Tailor one cycle after the read fires and are passed on in
// the same cycle on out_valid/out_data with the index and pass they belong to;
// the consumer cannot stall them. done pulses when the shrink fires.
module read_agen
  import tailors_pkg::*;
#(
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned TIDX_W = TIDX_W_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  logic [TIDX_W-1:0] cmd_len,
  input  logic [15:0]       cmd_passes,
  output logic              cmd_ready,
  // Tailor read and shrink ports
  output logic              rd_valid,
  output logic [TIDX_W-1:0] rd_idx,
  input  logic              rd_ready,
  input  logic              rd_resp_valid,
  input  logic [DATA_W-1:0] rd_resp_data,
  output logic              shr_valid,
  output logic [TIDX_W-1:0] shr_num,
  input  logic              shr_ready,
  // data to the consumer
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  output logic [TIDX_W-1:0] out_idx,
  output logic [15:0]       out_pass,
  output logic              done
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_SHRINK} state_e;

  state_e            st_q;
  logic [TIDX_W-1:0] len_q, idx_q, ridx_q;
  logic [15:0]       passes_q, pass_q, rpass_q;

  assign cmd_ready = (st_q == S_IDLE);
  assign rd_valid  = (st_q == S_READ);
  assign rd_idx    = idx_q;
  assign shr_valid = (st_q == S_SHRINK);
  assign shr_num   = len_q;
  assign done      = shr_valid && shr_ready;
  assign out_valid = rd_resp_valid;
  assign out_data  = rd_resp_data;
  assign out_idx   = ridx_q;
  assign out_pass  = rpass_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_q     <= S_IDLE;
      len_q    <= '0;
      idx_q    <= '0;
      passes_q <= '0;
      pass_q   <= '0;
      ridx_q   <= '0;
      rpass_q  <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (cmd_valid && cmd_len != '0 && cmd_passes != '0) begin
          len_q    <= cmd_len;
          passes_q <= cmd_passes;
          idx_q    <= '0;
          pass_q   <= '0;
          st_q     <= S_READ;
        end
        S_READ: if (rd_ready) begin
          ridx_q  <= idx_q;
          rpass_q <= pass_q;
          if (idx_q == len_q - 1'b1) begin
            idx_q <= '0;
            if (pass_q == passes_q - 1'b1) st_q <= S_SHRINK;
            else                           pass_q <= pass_q + 1'b1;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        S_SHRINK: if (shr_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
