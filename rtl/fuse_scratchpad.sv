// fuse_scratchpad: banked on-chip buffer, one bank per array row or column.
//
// The paper draws three scratchpad buffers around the array (left, top, bottom) without
// giving their organisation; this design makes each one NBANKS independent banks of DEPTH
// words so that every edge PE gets one word per cycle. Each bank has one synchronous write
// port and one synchronous read port (read data appears the cycle after raddr is presented;
// a read and a write to the same word in one cycle return the old word).
// The same module serves as the left buffer (input rows), the top buffer (GEMM operand B),
// the broadcast-weight buffer and the bottom (result) buffer.
module fuse_scratchpad #(
  parameter  int unsigned NBANKS = 64,
  parameter  int unsigned DEPTH  = 2048,
  parameter  int unsigned WIDTH  = 16,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we    [NBANKS],
  input  logic [AW-1:0]    waddr [NBANKS],
  input  logic [WIDTH-1:0] wdata [NBANKS],
  input  logic [AW-1:0]    raddr [NBANKS],
  output logic [WIDTH-1:0] rdata [NBANKS]
);

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[b]) mem[waddr[b]] <= wdata[b];
      rdata[b] <= mem[raddr[b]];
    end
  end

endmodule
