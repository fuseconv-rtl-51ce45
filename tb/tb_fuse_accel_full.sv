// tb_fuse_accel_full: the accelerator at its default size (64 x 64 PEs, 2048-word banks).
// One complete FuSeConv layer step at full width: every one of the 64 rows convolves its own
// 66-word input row with its own 3-tap filter over the broadcast link (64 outputs per row,
// all columns busy), followed by a pointwise-style GEMM fold (64x32 times 32x64). All 8192
// results and both fold latencies are checked against a reference computed here.
`timescale 1ns/1ps
module tb_fuse_accel_full;
  import fuse_pkg::*;

  localparam int unsigned S      = ARRAY_DIM_DEF;
  localparam int unsigned DATA_W = DATA_W_DEF;
  localparam int unsigned ACC_W  = ACC_W_DEF;
  localparam int unsigned DEPTH  = SPAD_DEPTH_DEF;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned BW     = $clog2(S);

  logic clk = 1'b0;
  logic rst_n, wr_en, start, busy, done;
  buf_sel_e wr_buf;
  logic [BW-1:0] wr_bank, rd_bank;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [DATA_W-1:0] wr_data;
  logic [ACC_W-1:0] rd_data;
  cmd_t cmd;

  int checks = 0, failures = 0, n_bcast = 0;

  always #5 clk = ~clk;

  fuse_accel dut (.*);

  always @(posedge clk) if (dut.bc_valid) n_bcast++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input buf_sel_e b, input int bank, input int addr, input int data);
    @(negedge clk);
    wr_en = 1'b1; wr_buf = b; wr_bank = BW'(bank); wr_addr = AW'(addr); wr_data = DATA_W'(data);
  endtask

  task automatic wr_end();
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic rd(input int bank, input int addr, output int data);
    @(negedge clk);
    rd_bank = BW'(bank); rd_addr = AW'(addr);
    @(negedge clk);
    data = int'($signed(rd_data));
  endtask

  task automatic run(input cmd_t c, input int expect_cycles);
    int cyc;
    @(negedge clk);
    cmd = c; start = 1'b1;
    @(posedge clk);
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done) begin
      @(posedge clk);
      cyc++;
      #1;
    end
    check(cyc == expect_cycles, $sformatf("fold latency %0d, expected %0d", cyc, expect_cycles));
  endtask

  function automatic int rnd(input int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  localparam int K = 3, L = S + K - 1, KD = 32;
  int x [S][L];
  int w [S][K];
  int a [S][KD];
  int b [KD][S];

  initial begin
    cmd_t c;
    int got, ref_v;
    rst_n = 1'b0; wr_en = 1'b0; wr_buf = BUF_LEFT; wr_bank = '0; wr_addr = '0; wr_data = '0;
    rd_bank = '0; rd_addr = '0; start = 1'b0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // FuSe fold: row filters of one channel, all 64 rows and 64 columns
    for (int r = 0; r < S; r++) begin
      for (int i = 0; i < L; i++) begin x[r][i] = rnd(2000); wr(BUF_LEFT, r, i, x[r][i]); end
      for (int k = 0; k < K; k++) begin w[r][k] = rnd(2000); wr(BUF_BCAST, r, 7 + k, w[r][k]); end
    end
    wr_end();
    c = '0;
    c.mode = MODE_FUSE; c.len = K; c.ncols = CNT_W'(S); c.col_off = 0;
    c.in_base = 0; c.w_base = 7; c.out_base = 0;
    run(c, 1 + (S + K + 1) + S);
    for (int r = 0; r < S; r++)
      for (int j = 0; j < S; j++) begin
        ref_v = 0;
        for (int k = 0; k < K; k++) ref_v += x[r][j+k] * w[r][k];
        rd(j, r, got);
        check(got == ref_v, $sformatf("FuSe row %0d O[%0d] = %0d, expected %0d", r, j, got, ref_v));
      end

    // GEMM fold
    for (int r = 0; r < S; r++)
      for (int k = 0; k < KD; k++) begin a[r][k] = rnd(2000); wr(BUF_LEFT, r, 100 + k, a[r][k]); end
    for (int k = 0; k < KD; k++)
      for (int col = 0; col < S; col++) begin b[k][col] = rnd(2000); wr(BUF_TOP, col, 3 + k, b[k][col]); end
    wr_end();
    c = '0;
    c.mode = MODE_GEMM; c.len = KD; c.in_base = 100; c.w_base = 3; c.out_base = 128;
    run(c, 1 + (KD + 2 * S) + S);
    for (int r = 0; r < S; r++)
      for (int col = 0; col < S; col++) begin
        ref_v = 0;
        for (int k = 0; k < KD; k++) ref_v += a[r][k] * b[k][col];
        rd(col, 128 + r, got);
        check(got == ref_v, $sformatf("GEMM C[%0d][%0d] = %0d, expected %0d", r, col, got, ref_v));
      end
    check(n_bcast == K, "broadcast link active for K cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
