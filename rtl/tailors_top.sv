// tailors_top: the memory hierarchy of a sparse tensor accelerator with Tailors
// at both on-chip levels: DRAM -> global buffer -> PE buffer -> PE datapath.
//
// Each operand (A and B are kept in separate buffers) has its own chain:
//   DRAM port  <- fill_agen (global level) -> tailor_buffer (global buffer)
//   global-buffer read port <- fill_agen (PE level) -> tailor_buffer (PE buffer)
//   PE buffer read port <- read_agen -> pe_out (to the PE datapath)
// and a tile_sequencer that sends one global-buffer tile down the chain: it
// fills the global-buffer Tailor from DRAM, feeds it to the PE Tailor subtile
// by subtile for the configured number of traversals, and finally shrinks the
// global-buffer tile. A level whose tile does not fit overbooks: its Tailor
// keeps the head of the tile and streams the rest through the FIFO-managed
// tail, while its parent cycles the bumped part. Both levels do this on their
// own, so a tile may overbook the global buffer, a subtile the PE buffer, or both.
//
// Following the paper: the three memory levels, a Tailor with its address
// generators at every on-chip level, fills pushed by the parent, reads and
// shrinks driven by the child, a configurable FIFO-managed region, and the
// paper's global buffer size (30 MB). This design's own choices: 32-bit words,
// the even split of the global buffer between the two operands, a PE buffer
// of one dense 128x128 tile, a FIFO region of up to 64 entries, one PE lane
// per operand (the paper's 128 PEs and their ExTensor datapath, and the way
// the global-buffer tile is divided among them, are outside this design:
// pe_out carries the data a PE would consume), one DRAM port per operand.
//
// The PE datapath may write back into its buffer through the Update port; the
// global buffer has no writer above the PEs here, so its Update port is tied
// off and its read offsets and push pulses are left unconnected. The occupancy,
// credits, FIFO offset, event and restream outputs are for monitors and
// performance counters.
//
// Timing: start is a pulse per operand; done pulses when that operand's tile
// has been shrunk from the global buffer. The DRAM port is valid/ready on the
// request and returns one word per request, in order, as a one-cycle pulse.
module tailors_top
  import tailors_pkg::*;
#(
  parameter int unsigned NOPS     = NUM_OPERANDS,
  parameter int unsigned DATA_W   = DATA_W_DEF,
  parameter int unsigned GLB_CAP  = GLB_CAP_DEF,
  parameter int unsigned PE_CAP   = PE_CAP_DEF,
  parameter int unsigned MAX_FIFO = MAX_FIFO_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [TIDX_W_DEF-1:0] cfg_glb_fifo_size,
  input  logic [TIDX_W_DEF-1:0] cfg_pe_fifo_size,
  input  logic      [NOPS-1:0]  start,
  input  tile_cfg_t [NOPS-1:0]  cfg,
  output logic      [NOPS-1:0]  busy,
  output logic      [NOPS-1:0]  done,
  // DRAM read ports
  output logic      [NOPS-1:0]                 dram_req_valid,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] dram_req_addr,
  input  logic      [NOPS-1:0]                 dram_req_ready,
  input  logic      [NOPS-1:0]                 dram_resp_valid,
  input  logic      [NOPS-1:0][DATA_W-1:0]     dram_resp_data,
  // data delivered to the PE datapath
  output logic      [NOPS-1:0]                 pe_out_valid,
  output logic      [NOPS-1:0][DATA_W-1:0]     pe_out_data,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] pe_out_idx,
  output logic      [NOPS-1:0][15:0]           pe_out_pass,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] pe_out_boff,   // PE buffer offset it was read from
  // Update(index, data) into the PE buffer, from the PE datapath
  input  logic      [NOPS-1:0]                 pe_upd_valid,
  input  logic      [NOPS-1:0][TIDX_W_DEF-1:0] pe_upd_idx,
  input  logic      [NOPS-1:0][DATA_W-1:0]     pe_upd_data,
  output logic      [NOPS-1:0]                 pe_upd_ready,
  // per-level events, for monitoring
  output tl_event_t [NOPS-1:0]                 glb_ev,
  output tl_event_t [NOPS-1:0]                 pe_ev,
  output tl_mode_e  [NOPS-1:0]                 glb_mode,
  output tl_mode_e  [NOPS-1:0]                 pe_mode,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] glb_occupancy,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] glb_credits,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] glb_fifo_offset,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] pe_occupancy,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] pe_credits,
  output logic      [NOPS-1:0][TIDX_W_DEF-1:0] pe_fifo_offset,
  output logic      [NOPS-1:0]                 glb_restream,  // DRAM wraps to the bumped part
  output logic      [NOPS-1:0]                 pe_restream    // global buffer wraps to the bumped part
);

  localparam int unsigned TW = TIDX_W_DEF;

  for (genvar o = 0; o < NOPS; o++) begin : g_op
    // sequencer <-> generators
    logic          glbc_valid, glbc_ready, pefc_valid, pefc_ready, perc_valid, perc_ready;
    logic [TW-1:0] glbc_base, glbc_len, pefc_base, pefc_len, perc_len;
    logic [15:0]   perc_passes;
    logic          seq_shr_valid, per_done;
    logic [TW-1:0] seq_shr_num;
    // global-buffer Tailor
    logic              gf_valid, gf_last, gf_ready;
    logic [DATA_W-1:0] gf_data;
    logic [TW-1:0]     gf_idx;
    logic              g_rd_valid, g_rd_ready, g_rresp_valid, g_shr_ready;
    logic [TW-1:0]     g_rd_idx;
    logic [DATA_W-1:0] g_rresp_data;
    logic              g_streaming;
    logic [TW-1:0]     g_restart;
    // PE Tailor
    logic              pf_valid, pf_last, pf_ready;
    logic [DATA_W-1:0] pf_data;
    logic [TW-1:0]     pf_idx;
    logic              p_rd_valid, p_rd_ready, p_rresp_valid, p_shr_valid, p_shr_ready;
    logic [TW-1:0]     p_rd_idx, p_shr_num;
    logic [DATA_W-1:0] p_rresp_data;
    logic              p_streaming;
    logic [TW-1:0]     p_restart;

    tile_sequencer #(.TIDX_W(TW)) u_seq (
      .clk, .rst_n, .start(start[o]), .cfg(cfg[o]), .busy(busy[o]), .done(done[o]),
      .glb_cmd_valid(glbc_valid), .glb_cmd_base(glbc_base), .glb_cmd_len(glbc_len),
      .glb_cmd_ready(glbc_ready),
      .glb_shr_valid(seq_shr_valid), .glb_shr_num(seq_shr_num), .glb_shr_ready(g_shr_ready),
      .pef_cmd_valid(pefc_valid), .pef_cmd_base(pefc_base), .pef_cmd_len(pefc_len),
      .pef_cmd_ready(pefc_ready),
      .per_cmd_valid(perc_valid), .per_cmd_len(perc_len), .per_cmd_passes(perc_passes),
      .per_cmd_ready(perc_ready), .per_done(per_done)
    );

    fill_agen #(.DATA_W(DATA_W), .TIDX_W(TW), .ADDR_W(TW)) u_glb_fill (
      .clk, .rst_n,
      .cmd_valid(glbc_valid), .cmd_base(glbc_base), .cmd_len(glbc_len), .cmd_ready(glbc_ready),
      .preq_valid(dram_req_valid[o]), .preq_addr(dram_req_addr[o]), .preq_ready(dram_req_ready[o]),
      .presp_valid(dram_resp_valid[o]), .presp_data(dram_resp_data[o]),
      .fill_valid(gf_valid), .fill_data(gf_data), .fill_idx(gf_idx), .fill_last(gf_last),
      .fill_ready(gf_ready), .tl_streaming(g_streaming), .tl_restart_idx(g_restart),
      .tl_tile_done(glb_ev[o].tile_done), .ev_push(), .ev_wrap(glb_restream[o])
    );

    tailor_buffer #(.DATA_W(DATA_W), .CAP(GLB_CAP), .MAX_FIFO(MAX_FIFO), .TIDX_W(TW)) u_glb (
      .clk, .rst_n, .cfg_fifo_size(cfg_glb_fifo_size),
      .fill_valid(gf_valid), .fill_data(gf_data), .fill_idx(gf_idx), .fill_last(gf_last),
      .fill_ready(gf_ready),
      .rd_valid(g_rd_valid), .rd_idx(g_rd_idx), .rd_ready(g_rd_ready),
      .rd_resp_valid(g_rresp_valid), .rd_resp_data(g_rresp_data), .rd_resp_boff(),
      .upd_valid(1'b0), .upd_idx('0), .upd_data('0), .upd_ready(),
      .shr_valid(seq_shr_valid), .shr_num(seq_shr_num), .shr_ready(g_shr_ready),
      .mode(glb_mode[o]), .occupancy(glb_occupancy[o]), .credits(glb_credits[o]),
      .fifo_offset(glb_fifo_offset[o]),
      .streaming(g_streaming), .restart_idx(g_restart), .ev(glb_ev[o])
    );

    fill_agen #(.DATA_W(DATA_W), .TIDX_W(TW), .ADDR_W(TW)) u_pe_fill (
      .clk, .rst_n,
      .cmd_valid(pefc_valid), .cmd_base(pefc_base), .cmd_len(pefc_len), .cmd_ready(pefc_ready),
      .preq_valid(g_rd_valid), .preq_addr(g_rd_idx), .preq_ready(g_rd_ready),
      .presp_valid(g_rresp_valid), .presp_data(g_rresp_data),
      .fill_valid(pf_valid), .fill_data(pf_data), .fill_idx(pf_idx), .fill_last(pf_last),
      .fill_ready(pf_ready), .tl_streaming(p_streaming), .tl_restart_idx(p_restart),
      .tl_tile_done(pe_ev[o].tile_done), .ev_push(), .ev_wrap(pe_restream[o])
    );

    tailor_buffer #(.DATA_W(DATA_W), .CAP(PE_CAP), .MAX_FIFO(MAX_FIFO), .TIDX_W(TW)) u_pe (
      .clk, .rst_n, .cfg_fifo_size(cfg_pe_fifo_size),
      .fill_valid(pf_valid), .fill_data(pf_data), .fill_idx(pf_idx), .fill_last(pf_last),
      .fill_ready(pf_ready),
      .rd_valid(p_rd_valid), .rd_idx(p_rd_idx), .rd_ready(p_rd_ready),
      .rd_resp_valid(p_rresp_valid), .rd_resp_data(p_rresp_data), .rd_resp_boff(pe_out_boff[o]),
      .upd_valid(pe_upd_valid[o]), .upd_idx(pe_upd_idx[o]), .upd_data(pe_upd_data[o]),
      .upd_ready(pe_upd_ready[o]),
      .shr_valid(p_shr_valid), .shr_num(p_shr_num), .shr_ready(p_shr_ready),
      .mode(pe_mode[o]), .occupancy(pe_occupancy[o]), .credits(pe_credits[o]),
      .fifo_offset(pe_fifo_offset[o]),
      .streaming(p_streaming), .restart_idx(p_restart), .ev(pe_ev[o])
    );

    read_agen #(.DATA_W(DATA_W), .TIDX_W(TW)) u_pe_read (
      .clk, .rst_n,
      .cmd_valid(perc_valid), .cmd_len(perc_len), .cmd_passes(perc_passes), .cmd_ready(perc_ready),
      .rd_valid(p_rd_valid), .rd_idx(p_rd_idx), .rd_ready(p_rd_ready),
      .rd_resp_valid(p_rresp_valid), .rd_resp_data(p_rresp_data),
      .shr_valid(p_shr_valid), .shr_num(p_shr_num), .shr_ready(p_shr_ready),
      .out_valid(pe_out_valid[o]), .out_data(pe_out_data[o]), .out_idx(pe_out_idx[o]),
      .out_pass(pe_out_pass[o]), .done(per_done)
    );
  end

endmodule
