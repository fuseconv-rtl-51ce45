// fuse_controller: sequences one fold on the FuSeConv systolic array.
//
// A fold is started by a one-cycle start pulse carrying a cmd_t. It runs
//   CLEAR  (1 cycle)  - zero every PE's operand registers and accumulator;
//   STREAM            - issue scratchpad read addresses, one operand word per edge per cycle,
//                       with mac_en high;
//   DRAIN  (S cycles) - shift the accumulators down and write them to the bottom scratchpad;
// and then pulses done. busy is high from the cycle after start until done.
//
// GEMM fold (standard output-stationary flow, as in the paper's matrix-multiply mapping):
// row r reads A[r][k] from left bank r at in_base+k in stream cycle k+r, column c reads
// B[k][c] from top bank c at w_base+k in cycle k+c; words outside 0<=k<len are zero. PE(r,c)
// ends with sum_k A[r][k]*B[k][c]. STREAM lasts len+2S cycles.
// FuSe fold (1D convolution per row, weight broadcast): every row reads its own input slice
// I[x] from its left bank, from x = col_off+ncols+len-2 down to x = col_off, one word per
// cycle; starting at stream cycle t0 = ncols-1 the filter taps w[len-1] .. w[0] of that row are
// read from its broadcast bank and put on the row's broadcast link. Column j of row r then
// ends with O[col_off+j] = sum_k I[col_off+j+k]*w[k] (a valid 1D convolution). Columns
// j >= ncols hold partial sums and are not written back. STREAM lasts ncols+len+1 cycles.
// The read order and the position of the taps in time are this design's choice; the paper
// fixes only that inputs move along the row and weights are broadcast to it.
// Drain: in drain cycle d the bottom row shows row S-1-d, written at out_base+S-1-d.
// Scratchpad reads take one cycle; the *_valid outputs are already delayed to line up with
// the read data, and the top level zeroes an edge word whose valid is low.
module fuse_controller
  import fuse_pkg::*;
#(
  parameter int unsigned S  = 64,
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cmd_t          cmd,
  output logic          busy,
  output logic          done,
  // array control
  output logic          data_en,
  output logic          clear,
  output logic          mac_en,
  output logic          drain,
  // left scratchpad (one bank per row)
  output logic [AW-1:0] left_raddr [S],
  output logic          left_valid [S],
  // top scratchpad (one bank per column)
  output logic [AW-1:0] top_raddr  [S],
  output logic          top_valid  [S],
  // broadcast scratchpad (one bank per row, all rows read the same address)
  output logic [AW-1:0] bc_raddr,
  output logic          bc_valid,
  // bottom scratchpad (one bank per column)
  output logic          out_we     [S],
  output logic [AW-1:0] out_waddr
);

  typedef enum logic [1:0] {ST_IDLE, ST_CLEAR, ST_STREAM, ST_DRAIN} state_e;

  state_e           state_q;
  cmd_t             cmd_q;
  logic [CNT_W-1:0] cnt_q;
  logic [CNT_W-1:0] stream_last, t0, fuse_top;
  logic             left_iv [S];
  logic             top_iv  [S];
  logic             bc_iv;

  assign stream_last = (cmd_q.mode == MODE_GEMM) ? cmd_q.len + CNT_W'(2 * S - 1)
                                                 : CNT_W'(cmd_q.ncols + cmd_q.len);
  assign t0          = cmd_q.ncols - 1'b1;
  assign fuse_top    = cmd_q.col_off + cmd_q.ncols + cmd_q.len - CNT_W'(2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      cmd_q   <= '0;
      cnt_q   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        ST_IDLE: if (start) begin
          cmd_q   <= cmd;
          cnt_q   <= '0;
          state_q <= ST_CLEAR;
        end
        ST_CLEAR: state_q <= ST_STREAM;
        ST_STREAM: begin
          if (cnt_q == stream_last) begin
            cnt_q   <= '0;
            state_q <= ST_DRAIN;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        ST_DRAIN: begin
          if (cnt_q == CNT_W'(S - 1)) begin
            cnt_q   <= '0;
            state_q <= ST_IDLE;
            done    <= 1'b1;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  assign busy    = (state_q != ST_IDLE);
  assign data_en = (cmd_q.mode == MODE_FUSE);
  assign clear   = (state_q == ST_CLEAR);
  assign mac_en  = (state_q == ST_STREAM);
  assign drain   = (state_q == ST_DRAIN);

  // Read addresses and the validity of the word each one fetches.
  always_comb begin
    logic streaming;
    logic [CNT_W-1:0] k;
    streaming = (state_q == ST_STREAM);
    k         = '0;
    for (int i = 0; i < S; i++) begin
      if (cmd_q.mode == MODE_GEMM) begin
        k             = cnt_q - CNT_W'(i);
        left_raddr[i] = AW'(cmd_q.in_base + k);
        top_raddr[i]  = AW'(cmd_q.w_base + k);
        left_iv[i]    = streaming && (cnt_q >= CNT_W'(i)) && (k < cmd_q.len);
        top_iv[i]     = left_iv[i];
      end else begin
        left_raddr[i] = AW'(cmd_q.in_base + fuse_top - cnt_q);
        top_raddr[i]  = '0;
        left_iv[i]    = streaming && (cnt_q < cmd_q.ncols + cmd_q.len - 1'b1);
        top_iv[i]     = 1'b0;
      end
    end
    bc_raddr = AW'(cmd_q.w_base + cmd_q.len - 1'b1 - (cnt_q - t0));
    bc_iv    = streaming && (cmd_q.mode == MODE_FUSE) && (cnt_q >= t0)
               && (CNT_W'(cnt_q - t0) < cmd_q.len);
  end

  // Valid flags follow the one-cycle scratchpad read latency.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bc_valid <= 1'b0;
      for (int i = 0; i < S; i++) begin
        left_valid[i] <= 1'b0;
        top_valid[i]  <= 1'b0;
      end
    end else begin
      bc_valid <= bc_iv;
      for (int i = 0; i < S; i++) begin
        left_valid[i] <= left_iv[i];
        top_valid[i]  <= top_iv[i];
      end
    end
  end

  // Drain: the bottom row of accumulators is written every cycle of DRAIN.
  always_comb begin
    out_waddr = AW'(cmd_q.out_base + CNT_W'(S - 1) - cnt_q);
    for (int c = 0; c < S; c++)
      out_we[c] = drain && ((cmd_q.mode == MODE_GEMM) || (CNT_W'(c) < cmd_q.ncols));
  end

  // A start pulse is only taken while idle; a FuSe fold needs 1..S columns and at least one tap.
  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while a fold is running");
  a_cmd_ok : assert property (@(posedge clk) disable iff (!rst_n)
      (start && cmd.mode == MODE_FUSE) |-> (cmd.len >= 1 && cmd.ncols >= 1 && cmd.ncols <= CNT_W'(S)))
    else $error("FuSe fold needs 1 <= ncols <= S and len >= 1");

endmodule
