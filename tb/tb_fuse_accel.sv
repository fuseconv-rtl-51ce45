// tb_fuse_accel: end-to-end test of the FuSeConv accelerator at a reduced array size.
//
// The host model loads the scratchpads through the write port, runs folds and reads the
// results back, comparing them with a reference computed here in plain integer arithmetic:
//   1. GEMM folds (standard systolic flow, A from the left, B from the top);
//   2. FuSe folds: every array row runs a 1D convolution of its own input row with its own
//      filter (weight broadcast), over two channels stored one after the other in the row's
//      banks, and over two column folds, the second one covering only part of the columns;
//   3. a GEMM fold again after the FuSe folds (mode switch back).
// Each fold's latency from start to done is checked against
//   1 + (len + 2S) + S cycles (GEMM) and 1 + (ncols + len + 1) + S cycles (FuSe).
// Each mechanism is counted and a failure is recorded for one that never happened.
`timescale 1ns/1ps
module tb_fuse_accel;
  import fuse_pkg::*;

  localparam int unsigned S      = 8;
  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned DEPTH  = 64;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned BW     = $clog2(S);

  logic clk = 1'b0;
  logic rst_n;
  logic wr_en;
  buf_sel_e wr_buf;
  logic [BW-1:0] wr_bank, rd_bank;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [DATA_W-1:0] wr_data;
  logic [ACC_W-1:0] rd_data;
  logic start, busy, done;
  cmd_t cmd;

  int checks = 0;
  int failures = 0;
  int n_gemm = 0, n_fuse = 0, n_partial = 0, n_coloff = 0, n_chan = 0, n_switch = 0;
  int n_bcast_cycles = 0, n_drain_cycles = 0;
  mode_e last_mode;
  bit have_last = 0;

  always #5 clk = ~clk;

  fuse_accel #(.S(S), .DATA_W(DATA_W), .ACC_W(ACC_W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .wr_en, .wr_buf, .wr_bank, .wr_addr, .wr_data,
    .rd_bank, .rd_addr, .rd_data, .start, .cmd, .busy, .done
  );

  always @(posedge clk) begin
    if (dut.bc_valid) n_bcast_cycles++;
    if (dut.drain)    n_drain_cycles++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input buf_sel_e b, input int bank, input int addr, input int data);
    @(negedge clk);
    wr_en = 1'b1; wr_buf = b; wr_bank = BW'(bank); wr_addr = AW'(addr); wr_data = DATA_W'(data);
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
    if (have_last && last_mode != c.mode) n_switch++;
    last_mode = c.mode; have_last = 1;
    if (c.mode == MODE_GEMM) n_gemm++; else n_fuse++;
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

  // ---------------- GEMM fold ----------------
  task automatic gemm_test(input int kd, input int out_base);
    int a [S][];
    int b [][S];
    int got, ref_v;
    cmd_t c;
    b = new[kd];
    for (int r = 0; r < S; r++) begin
      a[r] = new[kd];
      for (int k = 0; k < kd; k++) begin
        a[r][k] = rnd(300);
        wr(BUF_LEFT, r, 5 + k, a[r][k]);
      end
    end
    for (int k = 0; k < kd; k++)
      for (int col = 0; col < S; col++) begin
        b[k][col] = rnd(300);
        wr(BUF_TOP, col, 9 + k, b[k][col]);
      end
    c = '0;
    c.mode = MODE_GEMM; c.len = CNT_W'(kd); c.in_base = 5; c.w_base = 9;
    c.out_base = CNT_W'(out_base);
    run(c, 1 + (kd + 2 * S) + S);
    for (int r = 0; r < S; r++)
      for (int col = 0; col < S; col++) begin
        ref_v = 0;
        for (int k = 0; k < kd; k++) ref_v += a[r][k] * b[k][col];
        rd(col, out_base + r, got);
        check(got == ref_v, $sformatf("GEMM C[%0d][%0d] = %0d, expected %0d", r, col, got, ref_v));
      end
  endtask

  // ---------------- FuSe folds ----------------
  // Row r holds NCH channels of a length-L input row, channel ch at ch*L; its broadcast bank
  // holds the NCH filters of K taps, channel ch at ch*K. Output length N = L-K+1 > S, so
  // two column folds are needed.
  localparam int L = 12, K = 3, NCH = 2, N = L - K + 1;
  task automatic fuse_test();
    int x [S][NCH][L];
    int w [S][NCH][K];
    int got, ref_v, ob, f, nc;
    cmd_t c;
    for (int r = 0; r < S; r++)
      for (int ch = 0; ch < NCH; ch++) begin
        for (int i = 0; i < L; i++) begin
          x[r][ch][i] = rnd(500);
          wr(BUF_LEFT, r, ch * L + i, x[r][ch][i]);
        end
        for (int k = 0; k < K; k++) begin
          w[r][ch][k] = rnd(500);
          wr(BUF_BCAST, r, 40 + ch * K + k, w[r][ch][k]);
        end
      end
    ob = 30;
    for (int ch = 0; ch < NCH; ch++) begin
      if (ch > 0) n_chan++;
      f = 0;
      while (f < N) begin
        nc = (N - f < S) ? N - f : S;
        if (nc < S) n_partial++;
        if (f > 0) n_coloff++;
        c = '0;
        c.mode = MODE_FUSE; c.len = CNT_W'(K); c.ncols = CNT_W'(nc); c.col_off = CNT_W'(f);
        c.in_base = CNT_W'(ch * L); c.w_base = CNT_W'(40 + ch * K); c.out_base = CNT_W'(ob);
        run(c, 1 + (nc + K + 1) + S);
        for (int r = 0; r < S; r++)
          for (int j = 0; j < nc; j++) begin
            ref_v = 0;
            for (int k = 0; k < K; k++) ref_v += x[r][ch][f + j + k] * w[r][ch][k];
            rd(j, ob + r, got);
            check(got == ref_v, $sformatf("FuSe ch%0d row %0d out %0d = %0d, expected %0d",
                                          ch, r, f + j, got, ref_v));
          end
        f += nc;
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_buf = BUF_LEFT; wr_bank = '0; wr_addr = '0; wr_data = '0;
    rd_bank = '0; rd_addr = '0; start = 1'b0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    gemm_test(5, 0);
    fuse_test();
    gemm_test(11, 16);
    check(n_gemm > 0,         "no GEMM fold ran");
    check(n_fuse > 0,         "no FuSe fold ran");
    check(n_bcast_cycles > 0, "broadcast link never used");
    check(n_drain_cycles > 0, "no drain");
    check(n_partial > 0,      "no partial column fold");
    check(n_coloff > 0,       "no fold with a column offset");
    check(n_chan > 0,         "no channel fold");
    check(n_switch >= 2,      "mode switch did not happen both ways");
    $display("mechanisms: gemm=%0d fuse=%0d bcast_cycles=%0d drain_cycles=%0d partial=%0d coloff=%0d chanfold=%0d switches=%0d",
             n_gemm, n_fuse, n_bcast_cycles, n_drain_cycles, n_partial, n_coloff, n_chan, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
