// fuse_systolic_array: S x S grid of fuse_pe with the FuSeConv modified dataflow.
//
// Links, as in the paper's array figure: each row has a horizontal systolic link entering at
// the left edge (left_in[r]) and hopping one PE to the right per cycle; each column has a
// vertical systolic link entering at the top edge (top_in[c]) and hopping one PE down per
// cycle; each row also has a broadcast link (bcast_in[r]) that reaches all PEs of that row in
// the same cycle. data_en (DataEn) is common to all PEs: 0 selects the top link (standard
// output-stationary GEMM), 1 selects the broadcast link (rows run independent 1D
// convolutions). All PEs share clear, mac_en and drain.
// Results leave through the bottom edge: while drain is high every accumulator moves one row
// down per cycle, so bottom_acc[c] shows row S-1 first and row 0 after S-1 further cycles.
// The drain chain through the accumulators is this design's choice.
module fuse_systolic_array #(
  parameter int unsigned S      = 64,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     data_en,
  input  logic                     clear,
  input  logic                     mac_en,
  input  logic                     drain,
  input  logic signed [DATA_W-1:0] left_in  [S],
  input  logic signed [DATA_W-1:0] top_in   [S],
  input  logic signed [DATA_W-1:0] bcast_in [S],
  output logic signed [ACC_W-1:0]  bottom_acc [S]
);

  logic signed [DATA_W-1:0] h   [S][S+1];   // h[r][c]: into PE(r,c) from the left
  logic signed [DATA_W-1:0] v   [S+1][S];   // v[r][c]: into PE(r,c) from the top
  logic signed [ACC_W-1:0]  acc [S+1][S];   // acc[r+1][c]: accumulator of PE(r,c)

  for (genvar r = 0; r < S; r++) begin : g_row
    assign h[r][0] = left_in[r];
    for (genvar c = 0; c < S; c++) begin : g_col
      fuse_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .data_en   (data_en),
        .clear     (clear),
        .mac_en    (mac_en),
        .drain     (drain),
        .left_in   (h[r][c]),
        .top_in    (v[r][c]),
        .bcast_in  (bcast_in[r]),
        .psum_in   (acc[r][c]),
        .right_out (h[r][c+1]),
        .bottom_out(v[r+1][c]),
        .acc_out   (acc[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < S; c++) begin : g_edge
    assign v[0][c]       = top_in[c];
    assign acc[0][c]     = '0;
    assign bottom_acc[c] = acc[S][c];
  end

endmodule
