// tailors_pkg: types and default sizes shared by the Tailor buffer, its address
// generators and the two-level memory hierarchy.
//
// A Tailor (tail-overbooked buffer) runs in one of three modes:
//   TL_NORMAL   - plain buffet: fills go to the tail while credits remain.
//   TL_OVERBOOK - the tile did not fit; the last FIFO_SIZE slots of the buffer
//                 form a FIFO-managed region refreshed by overwriting fills.
//   TL_BACKFILL - a shrink freed space while overbooked; the parent stream is
//                 skipped until it wraps round to the first element that is
//                 missing, which is then filled normally (backfill).
// The mode names and the split into buffet-managed and FIFO-managed regions
// follow the paper; the third, explicit backfill-wait mode is this design's way
// of keeping indices coherent during backfill.
//
// Default capacities: the global buffer of the paper's configuration holds 30 MB;
// it is split evenly between the two operands and counted in 32-bit words
// (15 MB / 4 B = 3,932,160 words per operand). The PE buffer holds one dense
// 128x128 tile (16,384 words), the tile the paper's fixed-size baseline always
// fits into a PE buffer. The split and the word size are this design's choice.
package tailors_pkg;

  typedef enum logic [1:0] {
    TL_NORMAL   = 2'd0,
    TL_OVERBOOK = 2'd1,
    TL_BACKFILL = 2'd2
  } tl_mode_e;

  // One-cycle event flags a Tailor raises, for monitors and performance counters.
  typedef struct packed {
    logic fill;         // buffet fill accepted
    logic owfill_init;  // first overwriting fill: FIFO region carved out of the tail
    logic owfill;       // later overwriting fill (append or overwrite of oldest)
    logic ow_overwrite; // overwriting fill that replaced the oldest FIFO entry
    logic discard;      // streamed element skipped while waiting to backfill
    logic shrink;       // shrink accepted
    logic shrink_ob;    // shrink accepted while overbooked (starts backfill)
    logic tile_done;    // the whole current tile has been shrunk away
    logic rd_stall;     // read request waiting for data not resident
  } tl_event_t;

  localparam int unsigned DATA_W_DEF   = 32;
  localparam int unsigned TIDX_W_DEF   = 32;         // tile index / element address width
  localparam int unsigned GLB_CAP_DEF  = 3_932_160;  // words per operand in the global buffer
  localparam int unsigned PE_CAP_DEF   = 16_384;     // words per operand in a PE buffer
  localparam int unsigned MAX_FIFO_DEF = 64;         // largest FIFO-managed region supported
  localparam int unsigned NUM_OPERANDS = 2;          // operands A and B have separate buffers

  // Per-operand schedule given to a tile_sequencer. The tile sizes are what the
  // offline tile-size selection chooses; pass counts express the reuse the
  // dataflow makes of a tile.
  typedef struct packed {
    logic [TIDX_W_DEF-1:0] dram_base;   // DRAM word address of the global-buffer tile
    logic [TIDX_W_DEF-1:0] glb_len;     // elements in the global-buffer tile
    logic [TIDX_W_DEF-1:0] pe_len;      // elements per PE subtile
    logic [15:0]           glb_passes;  // traversals of the global-buffer tile
    logic [15:0]           pe_passes;   // traversals of each PE subtile
  } tile_cfg_t;

endpackage
