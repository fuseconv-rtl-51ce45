// fuse_pkg: types and default sizes shared by the FuSeConv systolic-array accelerator.
//
// The accelerator runs two kinds of fold on one SxS output-stationary array:
//   MODE_GEMM - the standard systolic flow: operand A enters along the rows, operand B
//               along the columns, both skewed by one cycle per row/column. Pointwise (1x1)
//               convolutions and fully connected layers use it.
//   MODE_FUSE - the FuSeConv flow: each array row runs an independent 1D convolution; the
//               input row streams along the horizontal systolic link and the filter taps are
//               broadcast to all PEs of the row on that row's broadcast link.
// The array size default (64) is the size the performance study uses; the data width (16)
// matches the 16-bit FP16 words of the networks but the arithmetic here is signed integer,
// a choice of this design. Accumulator width and buffer depth are this design's choices too.
package fuse_pkg;

  localparam int unsigned ARRAY_DIM_DEF  = 64;   // S: rows = columns of the PE grid
  localparam int unsigned DATA_W_DEF     = 16;   // operand width
  localparam int unsigned ACC_W_DEF      = 32;   // accumulator width
  localparam int unsigned SPAD_DEPTH_DEF = 2048; // words per scratchpad bank
  localparam int unsigned CNT_W          = 16;   // width of command fields

  // Selects what the PE multiplexer (DataEn) feeds to the vertical operand register.
  typedef enum logic {
    MODE_GEMM = 1'b0,   // top systolic link
    MODE_FUSE = 1'b1    // row broadcast link
  } mode_e;

  // Scratchpad written by the host write port.
  typedef enum logic [1:0] {
    BUF_LEFT  = 2'd0,   // per-row bank: GEMM operand A / FuSe input row slices
    BUF_TOP   = 2'd1,   // per-column bank: GEMM operand B
    BUF_BCAST = 2'd2    // per-row bank: FuSe 1D filter taps for the broadcast link
  } buf_sel_e;

  // One fold. Addresses are word addresses inside every bank of a scratchpad.
  typedef struct packed {
    mode_e            mode;
    logic [CNT_W-1:0] len;      // GEMM: inner dimension; FuSe: filter taps K
    logic [CNT_W-1:0] ncols;    // FuSe: active columns = outputs per row (1..S); GEMM: unused
    logic [CNT_W-1:0] col_off;  // FuSe: index of the first output of this column fold
    logic [CNT_W-1:0] in_base;  // left scratchpad base (A row / input row slice)
    logic [CNT_W-1:0] w_base;   // GEMM: top scratchpad base; FuSe: broadcast scratchpad base
    logic [CNT_W-1:0] out_base; // bottom scratchpad base; row r of the array lands at out_base+r
  } cmd_t;

endpackage
