// fuse_accel: FuSeConv accelerator top level - an S x S output-stationary systolic array
// with a weight-broadcast link per row, surrounded by its scratchpad buffers.
//
// Arrangement (the paper's array figure): the left scratchpad feeds the rows, the top
// scratchpad feeds the columns, the bottom scratchpad collects results. The source of the
// per-row broadcast words is not named in the paper; here it is a fourth banked buffer on the
// left side, one bank per row, holding that row's 1D filters (the paper's mapping figure shows
// a queue of filters K1..K(C/2) next to each row's queue of input slices).
//
// Host interface (this design's choice; the paper does not describe one):
//   wr_*   - one word per cycle into bank wr_bank of the buffer wr_buf (left, top, broadcast);
//   rd_*   - result read from the bottom scratchpad, rd_data valid the cycle after rd_addr;
//   start/cmd/busy/done - run one fold (see fuse_controller for the GEMM and FuSe folds).
// A fold takes 1 + (len+2S) + S cycles in GEMM mode and 1 + (ncols+len+1) + S cycles in FuSe
// mode from start to the done pulse (done comes one cycle after the last drain write).
module fuse_accel
  import fuse_pkg::*;
#(
  parameter  int unsigned S      = ARRAY_DIM_DEF,
  parameter  int unsigned DATA_W = DATA_W_DEF,
  parameter  int unsigned ACC_W  = ACC_W_DEF,
  parameter  int unsigned DEPTH  = SPAD_DEPTH_DEF,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned BW     = $clog2(S)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host write port
  input  logic              wr_en,
  input  buf_sel_e          wr_buf,
  input  logic [BW-1:0]     wr_bank,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  // host read port (bottom scratchpad)
  input  logic [BW-1:0]     rd_bank,
  input  logic [AW-1:0]     rd_addr,
  output logic [ACC_W-1:0]  rd_data,
  // fold command
  input  logic              start,
  input  cmd_t              cmd,
  output logic              busy,
  output logic              done
);

  // controller <-> datapath
  logic          data_en, clear, mac_en, drain;
  logic [AW-1:0] left_raddr [S];
  logic          left_valid [S];
  logic [AW-1:0] top_raddr  [S];
  logic          top_valid  [S];
  logic [AW-1:0] bc_raddr;
  logic          bc_valid;
  logic          out_we     [S];
  logic [AW-1:0] out_waddr;

  // scratchpad ports
  logic              left_we [S], top_we [S], bc_we [S];
  logic [AW-1:0]     in_waddr [S];
  logic [DATA_W-1:0] in_wdata [S];
  logic [AW-1:0]     bc_raddr_v [S];
  logic [AW-1:0]     out_raddr [S];
  logic [DATA_W-1:0] left_rdata [S], top_rdata [S], bc_rdata [S];
  logic [ACC_W-1:0]  out_wdata [S], out_rdata [S];
  logic [AW-1:0]     out_waddr_v [S];

  // array edges
  logic signed [DATA_W-1:0] left_in [S], top_in [S], bcast_in [S];
  logic signed [ACC_W-1:0]  bottom_acc [S];

  logic [BW-1:0] rd_bank_q;

  fuse_controller #(.S(S), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .data_en, .clear, .mac_en, .drain,
    .left_raddr, .left_valid, .top_raddr, .top_valid,
    .bc_raddr, .bc_valid, .out_we, .out_waddr
  );

  always_comb begin
    for (int i = 0; i < S; i++) begin
      left_we[i]     = wr_en && (wr_buf == BUF_LEFT)  && (wr_bank == BW'(i));
      top_we[i]      = wr_en && (wr_buf == BUF_TOP)   && (wr_bank == BW'(i));
      bc_we[i]       = wr_en && (wr_buf == BUF_BCAST) && (wr_bank == BW'(i));
      in_waddr[i]    = wr_addr;
      in_wdata[i]    = wr_data;
      bc_raddr_v[i]  = bc_raddr;
      out_raddr[i]   = rd_addr;
      out_waddr_v[i] = out_waddr;
      out_wdata[i]   = bottom_acc[i];
      // an edge word whose read was out of range enters the array as zero
      left_in[i]     = left_valid[i] ? left_rdata[i] : '0;
      top_in[i]      = top_valid[i]  ? top_rdata[i]  : '0;
      bcast_in[i]    = bc_valid      ? bc_rdata[i]   : '0;
    end
  end

  fuse_scratchpad #(.NBANKS(S), .DEPTH(DEPTH), .WIDTH(DATA_W)) u_spad_left (
    .clk, .we(left_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(left_raddr), .rdata(left_rdata)
  );

  fuse_scratchpad #(.NBANKS(S), .DEPTH(DEPTH), .WIDTH(DATA_W)) u_spad_top (
    .clk, .we(top_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(top_raddr), .rdata(top_rdata)
  );

  fuse_scratchpad #(.NBANKS(S), .DEPTH(DEPTH), .WIDTH(DATA_W)) u_spad_bcast (
    .clk, .we(bc_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(bc_raddr_v), .rdata(bc_rdata)
  );

  fuse_systolic_array #(.S(S), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .data_en, .clear, .mac_en, .drain,
    .left_in, .top_in, .bcast_in, .bottom_acc
  );

  fuse_scratchpad #(.NBANKS(S), .DEPTH(DEPTH), .WIDTH(ACC_W)) u_spad_out (
    .clk, .we(out_we), .waddr(out_waddr_v), .wdata(out_wdata),
    .raddr(out_raddr), .rdata(out_rdata)
  );

  always_ff @(posedge clk) rd_bank_q <= rd_bank;
  assign rd_data = out_rdata[rd_bank_q];

endmodule
