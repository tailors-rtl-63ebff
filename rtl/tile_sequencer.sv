// tile_sequencer: walks one global-buffer tile through the PE-level buffer.
//
// It starts the global-buffer fill generator on the tile, then, for each of
// glb_passes traversals, cuts the tile into consecutive PE subtiles of pe_len
// elements (the last one may be shorter). For each subtile it starts the PE
// fill generator (which reads the subtile out of the global-buffer Tailor) and
// the PE read generator (which traverses it pe_passes times and shrinks it),
// and waits until the PE read generator is done. After the last traversal it
// shrinks the whole tile out of the global-buffer Tailor, since the child
// level drives the shrinks of its parent, and pulses done.
//
// Following the paper: tiles are built once and passed down level by level,
// and the child's address generator drives the parent's shrink. This design's
// own choice: the subtile order (dense, consecutive positions) and the pass
// counts; the paper's dataflow (the ExTensor intersection order) is not given.
//
// Timing: start is sampled in the idle state; commands are valid/ready.
module tile_sequencer
  import tailors_pkg::*;
#(
  parameter int unsigned TIDX_W = TIDX_W_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  tile_cfg_t         cfg,
  output logic              busy,
  output logic              done,
  // global-buffer fill generator
  output logic              glb_cmd_valid,
  output logic [TIDX_W-1:0] glb_cmd_base,
  output logic [TIDX_W-1:0] glb_cmd_len,
  input  logic              glb_cmd_ready,
  // shrink of the global-buffer Tailor
  output logic              glb_shr_valid,
  output logic [TIDX_W-1:0] glb_shr_num,
  input  logic              glb_shr_ready,
  // PE fill and read generators
  output logic              pef_cmd_valid,
  output logic [TIDX_W-1:0] pef_cmd_base,
  output logic [TIDX_W-1:0] pef_cmd_len,
  input  logic              pef_cmd_ready,
  output logic              per_cmd_valid,
  output logic [TIDX_W-1:0] per_cmd_len,
  output logic [15:0]       per_cmd_passes,
  input  logic              per_cmd_ready,
  input  logic              per_done
);

  typedef enum logic [2:0] {S_IDLE, S_GLB, S_SUB, S_WAIT, S_SHRINK} state_e;

  state_e            st_q;
  tile_cfg_t         cfg_q;
  logic [TIDX_W-1:0] k_q;      // first GLB index of the current subtile
  logic [15:0]       g_q;      // current GLB traversal
  logic [TIDX_W-1:0] sub_len;
  logic [TIDX_W-1:0] rem;

  assign rem     = TIDX_W'(cfg_q.glb_len) - k_q;
  assign sub_len = (rem < TIDX_W'(cfg_q.pe_len)) ? rem : TIDX_W'(cfg_q.pe_len);

  assign busy           = (st_q != S_IDLE);
  assign glb_cmd_valid  = (st_q == S_GLB);
  assign glb_cmd_base   = TIDX_W'(cfg_q.dram_base);
  assign glb_cmd_len    = TIDX_W'(cfg_q.glb_len);
  assign glb_shr_valid  = (st_q == S_SHRINK);
  assign glb_shr_num    = TIDX_W'(cfg_q.glb_len);
  assign pef_cmd_valid  = (st_q == S_SUB) && pef_cmd_ready && per_cmd_ready;
  assign pef_cmd_base   = k_q;
  assign pef_cmd_len    = sub_len;
  assign per_cmd_valid  = pef_cmd_valid;
  assign per_cmd_len    = sub_len;
  assign per_cmd_passes = cfg_q.pe_passes;
  assign done           = glb_shr_valid && glb_shr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_q  <= S_IDLE;
      cfg_q <= '0;
      k_q   <= '0;
      g_q   <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (start && cfg.glb_len != '0 && cfg.pe_len != '0 && cfg.glb_passes != '0
                    && cfg.pe_passes != '0) begin
          cfg_q <= cfg;
          k_q   <= '0;
          g_q   <= '0;
          st_q  <= S_GLB;
        end
        S_GLB:  if (glb_cmd_ready) st_q <= S_SUB;
        S_SUB:  if (pef_cmd_valid) st_q <= S_WAIT;
        S_WAIT: if (per_done) begin
          if (k_q + sub_len >= TIDX_W'(cfg_q.glb_len)) begin
            k_q <= '0;
            if (g_q == cfg_q.glb_passes - 1'b1) st_q <= S_SHRINK;
            else begin
              g_q  <= g_q + 1'b1;
              st_q <= S_SUB;
            end
          end else begin
            k_q  <= k_q + sub_len;
            st_q <= S_SUB;
          end
        end
        S_SHRINK: if (glb_shr_ready) st_q <= S_IDLE;
        default:  st_q <= S_IDLE;
      endcase
    end
  end

endmodule
