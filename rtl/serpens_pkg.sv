// serpens_pkg -- constants and types shared by the Serpens SpMV accelerator.
//
// The accelerator computes y = alpha * A * x + beta * y for a sparse matrix A
// streamed from 16 HBM channels. All off-chip traffic moves in 512-bit beats:
// a dense-vector beat carries 16 FP32 values, a sparse beat carries 8 non-zeros
// of 64 bits each (32-bit FP32 value plus a 32-bit packed row/column index).
// Bus, data, index and instruction widths follow the paper's parameter table.
// The split of the 32-bit index into an 18-bit local row and a 14-bit column,
// and the all-ones "bubble" index used for padding slots, are choices of this
// implementation.
package serpens_pkg;

  localparam int unsigned BUS_W          = 512;  // HBM port width
  localparam int unsigned FLT_W          = 32;   // FP32 data
  localparam int unsigned FLT_PER_BEAT   = BUS_W / FLT_W;  // 16 dense values / beat
  localparam int unsigned NZ_W           = 64;   // one encoded non-zero
  localparam int unsigned NZ_PER_BEAT    = BUS_W / NZ_W;   // 8 non-zeros / beat
  localparam int unsigned PES_PER_CH     = 8;    // PEs fed by one A channel
  localparam int unsigned COL_BITS       = 14;   // column inside an x segment
  localparam int unsigned ROW_BITS       = 18;   // row local to one PE
  localparam int unsigned ADDR_W         = 32;   // HBM beat address
  localparam int unsigned INSTR_W        = 32;   // instruction word

  typedef logic [BUS_W-1:0] beat_t;
  typedef logic [FLT_W-1:0] f32_t;

  // One non-zero as it sits in a 64-bit lane of a sparse beat:
  //   [63:32] FP32 value, [31:14] local row, [13:0] column in segment.
  typedef struct packed {
    f32_t                val;
    logic [ROW_BITS-1:0] row;
    logic [COL_BITS-1:0] col;
  } nz_t;

  // Index value that marks an empty slot inserted by the reordering.
  localparam logic [ROW_BITS+COL_BITS-1:0] BUBBLE_IDX = '1;

  // Simple request/response view of one HBM pseudo-channel port
  // (an AXI read/write channel reduced to what a streaming engine needs).
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;   // beat (64-byte) address
  } rd_req_t;

  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;
    beat_t             data;
  } wr_req_t;

endpackage
