// fuse_pe: processing element of the FuSeConv systolic array.
//
// Built as drawn in the PE inset of the paper's array figure: a multiplexer steered by
// DataEn picks either the top systolic link or the row broadcast link; its output is
// registered (vertical operand register) and passed on downwards. The operand from the left
// is registered (horizontal operand register) and passed on to the right. The two registers
// feed a multiplier whose product is added into the stationary accumulator (AccReg).
//
// Control, all synchronous to clk:
//   clear  - zero both operand registers and the accumulator (start of a fold)
//   mac_en - accumulate h*v this cycle
//   drain  - load the accumulator from psum_in, the accumulator of the PE above, so that a
//            column of results shifts down into the bottom scratchpad one row per cycle.
// The paper's inset shows an adder input coming from the top edge of the PE but does not say
// what it carries; using it as the result-drain chain is this design's reading. Operands are
// signed integers (the paper's networks use FP16; the arithmetic type is this design's choice).
// Timing: an operand presented at an input is visible to the multiplier, and to the next PE,
// one cycle later; the accumulator updates at the end of the cycle in which mac_en is high.
module fuse_pe #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     data_en,   // 1: row broadcast link, 0: top systolic link
  input  logic                     clear,
  input  logic                     mac_en,
  input  logic                     drain,
  input  logic signed [DATA_W-1:0] left_in,
  input  logic signed [DATA_W-1:0] top_in,
  input  logic signed [DATA_W-1:0] bcast_in,
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [DATA_W-1:0] right_out,
  output logic signed [DATA_W-1:0] bottom_out,
  output logic signed [ACC_W-1:0]  acc_out
);

  logic signed [DATA_W-1:0]   h_q, v_q, v_d;
  logic signed [ACC_W-1:0]    acc_q;
  logic signed [2*DATA_W-1:0] prod;

  assign v_d  = data_en ? bcast_in : top_in;
  assign prod = h_q * v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q   <= '0;
      v_q   <= '0;
      acc_q <= '0;
    end else if (clear) begin
      h_q   <= '0;
      v_q   <= '0;
      acc_q <= '0;
    end else begin
      h_q <= left_in;
      v_q <= v_d;
      if (drain)       acc_q <= psum_in;
      else if (mac_en) acc_q <= acc_q + ACC_W'(prod);
    end
  end

  assign right_out  = h_q;
  assign bottom_out = v_q;
  assign acc_out    = acc_q;

endmodule
