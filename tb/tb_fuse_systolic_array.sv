// tb_fuse_systolic_array: self-checking test of the PE grid with its three kinds of link.
// The testbench plays the scratchpads and the controller itself:
//   GEMM: A[r][k] enters row r at cycle k+r, B[k][c] enters column c at cycle k+c
//         (DataEn = 0, top link); every PE(r,c) must end with sum_k A[r][k]*B[k][c].
//   FuSe: row r streams its input row I_r from the highest index down along the row and,
//         from cycle S-1 on, broadcasts its taps w_r[K-1]..w_r[0] (DataEn = 1); PE(r,j) must
//         end with sum_k I_r[j+k]*w_r[k].
// Results are read at the bottom edge during the S drain cycles (row S-1 first), and the
// number of drain cycles until row 0 appears is checked.
`timescale 1ns/1ps
module tb_fuse_systolic_array;
  localparam int unsigned S      = 4;
  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 32;

  logic clk = 1'b0;
  logic rst_n, data_en, clear, mac_en, drain;
  logic signed [DATA_W-1:0] left_in [S], top_in [S], bcast_in [S];
  logic signed [ACC_W-1:0]  bottom_acc [S];

  int checks = 0, failures = 0;
  int res [S][S];

  always #5 clk = ~clk;

  fuse_systolic_array #(.S(S), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(input int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  task automatic idle_edges();
    for (int i = 0; i < S; i++) begin left_in[i] = '0; top_in[i] = '0; bcast_in[i] = '0; end
  endtask

  task automatic do_clear();
    @(negedge clk);
    idle_edges(); clear = 1'b1; mac_en = 1'b0; drain = 1'b0;
    @(negedge clk);
    clear = 1'b0;
  endtask

  task automatic do_drain();
    for (int d = 0; d < S; d++) begin
      // called at a negedge: bottom_acc shows row S-1-d
      idle_edges(); mac_en = 1'b0; drain = 1'b1;
      #1;
      for (int c = 0; c < S; c++) res[S-1-d][c] = int'(bottom_acc[c]);
      @(negedge clk);
    end
    drain = 1'b0;
  endtask

  task automatic gemm(input int kd);
    int a [S][16];
    int b [16][S];
    int ref_v;
    for (int r = 0; r < S; r++) for (int k = 0; k < kd; k++) a[r][k] = rnd(1000);
    for (int k = 0; k < kd; k++) for (int c = 0; c < S; c++) b[k][c] = rnd(1000);
    data_en = 1'b0;
    do_clear();
    for (int e = 0; e <= kd + 2 * S - 2; e++) begin
      for (int i = 0; i < S; i++) begin
        left_in[i]  = (e - i >= 0 && e - i < kd) ? DATA_W'(a[i][e-i]) : '0;
        top_in[i]   = (e - i >= 0 && e - i < kd) ? DATA_W'(b[e-i][i]) : '0;
        bcast_in[i] = DATA_W'(rnd(1000));   // ignored while DataEn = 0
      end
      mac_en = 1'b1;
      @(negedge clk);
    end
    do_drain();
    for (int r = 0; r < S; r++)
      for (int c = 0; c < S; c++) begin
        ref_v = 0;
        for (int k = 0; k < kd; k++) ref_v += a[r][k] * b[k][c];
        checks++;
        if (res[r][c] != ref_v) begin
          failures++;
          $display("FAIL GEMM C[%0d][%0d]=%0d expected %0d", r, c, res[r][c], ref_v);
        end
      end
  endtask

  task automatic fuse(input int kt);
    int x [S][16];
    int w [S][8];
    int p, t0, ref_v;
    p  = S + kt - 2;       // highest input index used by column S-1
    t0 = S - 1;
    for (int r = 0; r < S; r++) begin
      for (int i = 0; i <= p; i++) x[r][i] = rnd(1000);
      for (int k = 0; k < kt; k++) w[r][k] = rnd(1000);
    end
    data_en = 1'b1;
    do_clear();
    for (int e = 0; e <= S + kt - 1; e++) begin
      for (int r = 0; r < S; r++) begin
        left_in[r]  = (e <= p) ? DATA_W'(x[r][p-e]) : '0;
        bcast_in[r] = (e >= t0 && e - t0 < kt) ? DATA_W'(w[r][kt-1-(e-t0)]) : '0;
        top_in[r]   = DATA_W'(rnd(1000));  // ignored while DataEn = 1
      end
      mac_en = 1'b1;
      @(negedge clk);
    end
    do_drain();
    for (int r = 0; r < S; r++)
      for (int j = 0; j < S; j++) begin
        ref_v = 0;
        for (int k = 0; k < kt; k++) ref_v += x[r][j+k] * w[r][k];
        checks++;
        if (res[r][j] != ref_v) begin
          failures++;
          $display("FAIL FuSe row %0d O[%0d]=%0d expected %0d", r, j, res[r][j], ref_v);
        end
      end
  endtask

  initial begin
    rst_n = 1'b0; data_en = 1'b0; clear = 1'b0; mac_en = 1'b0; drain = 1'b0;
    idle_edges();
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    gemm(3);
    fuse(3);
    gemm(7);
    fuse(5);
    fuse(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
