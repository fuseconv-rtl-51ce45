// tb_mbv1_fuse_block: one complete FuSe-Half block of MobileNet-V1 on the default 64 x 64
// accelerator.
//
// Layer sizes (those of the first separable block of MobileNet-V1): input 112 x 112 x 32,
// 3-tap 1D filters, stride 1, zero padding 1, followed by a pointwise convolution to 64
// channels. In the half variant channels 0..15 get a 1x3 filter along the width and channels
// 16..31 a 3x1 filter along the height; the 32 filtered channels then feed the pointwise
// convolution.
// Mapping: for a row filter each array row takes one image row (112 rows = folds of 64 + 48
// rows); every row bank holds the padded row (114 words) of all 16 channels, one channel fold
// after the other, and the 112 outputs of a row take a column fold of 64 and one of 48
// columns. A column filter is mapped the same way with image columns in the row banks. The
// pointwise convolution is a GEMM per 64 pixels x 64 output channels with inner dimension 32.
// Operands are small random integers; every one of the 401408 filter outputs and 802816
// pointwise outputs is compared with a reference computed here.
`timescale 1ns/1ps
module tb_mbv1_fuse_block;
  import fuse_pkg::*;

  localparam int unsigned S      = ARRAY_DIM_DEF;
  localparam int unsigned DATA_W = DATA_W_DEF;
  localparam int unsigned ACC_W  = ACC_W_DEF;
  localparam int unsigned DEPTH  = SPAD_DEPTH_DEF;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned BW     = $clog2(S);

  localparam int HW = 112, C = 32, CH = C / 2, COUT = 64, K = 3, PADW = HW + 2;
  localparam int WBASE = 1900;   // filters in the broadcast banks

  logic clk = 1'b0;
  logic rst_n, wr_en, start, busy, done;
  buf_sel_e wr_buf;
  logic [BW-1:0] wr_bank, rd_bank;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [DATA_W-1:0] wr_data;
  logic [ACC_W-1:0] rd_data;
  cmd_t cmd;

  int checks = 0, failures = 0;
  int n_fuse = 0, n_gemm = 0, n_partial = 0;

  always #5 clk = ~clk;

  fuse_accel dut (.*);

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
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

  // pipelined read: address in one cycle, data the next
  task automatic rd(input int bank, input int addr, output int data);
    @(negedge clk);
    rd_bank = BW'(bank); rd_addr = AW'(addr);
    @(negedge clk);
    data = int'($signed(rd_data));
  endtask

  task automatic run(input cmd_t c);
    @(negedge clk);
    cmd = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    if (c.mode == MODE_FUSE) n_fuse++; else n_gemm++;
    if (c.mode == MODE_FUSE && c.ncols < S) n_partial++;
  endtask

  function automatic int rnd(input int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  int x  [HW][HW][C];      // input   [h][w][c]
  int wf [C][K];           // 1D filters
  int y  [HW][HW][C];      // reference filter output
  int wp [C][COUT];        // pointwise weights

  function automatic int xpad(input int h, input int w, input int c);
    if (h < 0 || h >= HW || w < 0 || w >= HW) return 0;
    return x[h][w][c];
  endfunction

  // one pass of 1D filters: horiz=1 filters along the width (channels 0..15),
  // horiz=0 along the height (channels 16..31)
  task automatic filter_pass(input bit horiz);
    int c0, nr, nc, got;
    cmd_t cm;
    c0 = horiz ? 0 : CH;
    for (int g = 0; g < HW; g += S) begin
      nr = (HW - g < S) ? HW - g : S;
      // line r of the array holds image row (or column) g+r of every channel, padded
      for (int r = 0; r < nr; r++)
        for (int ch = 0; ch < CH; ch++)
          for (int i = 0; i < PADW; i++)
            wr(BUF_LEFT, r, ch * PADW + i,
               horiz ? xpad(g + r, i - 1, c0 + ch) : xpad(i - 1, g + r, c0 + ch));
      wr_end();
      for (int ch = 0; ch < CH; ch++)
        for (int f = 0; f < HW; f += S) begin
          nc = (HW - f < S) ? HW - f : S;
          cm = '0;
          cm.mode = MODE_FUSE; cm.len = K; cm.ncols = CNT_W'(nc); cm.col_off = CNT_W'(f);
          cm.in_base = CNT_W'(ch * PADW); cm.w_base = CNT_W'(WBASE + (c0 + ch) * K);
          cm.out_base = 0;
          run(cm);
          for (int r = 0; r < nr; r++)
            for (int j = 0; j < nc; j++) begin
              rd(j, r, got);
              if (horiz) check(got == y[g+r][f+j][c0+ch], $sformatf("row filter h%0d w%0d c%0d", g+r, f+j, c0+ch));
              else       check(got == y[f+j][g+r][c0+ch], $sformatf("col filter h%0d w%0d c%0d", f+j, g+r, c0+ch));
            end
        end
    end
  endtask

  initial begin
    cmd_t cm;
    int acc, got, p;
    rst_n = 1'b0; wr_en = 1'b0; wr_buf = BUF_LEFT; wr_bank = '0; wr_addr = '0; wr_data = '0;
    rd_bank = '0; rd_addr = '0; start = 1'b0; cmd = '0;

    // data and reference
    foreach (x[h, w, c]) x[h][w][c] = rnd(50);
    foreach (wf[c, k]) wf[c][k] = rnd(50);
    foreach (wp[c, o]) wp[c][o] = rnd(50);
    for (int h = 0; h < HW; h++)
      for (int w = 0; w < HW; w++)
        for (int c = 0; c < C; c++) begin
          acc = 0;
          for (int k = 0; k < K; k++)
            acc += (c < CH ? xpad(h, w + k - 1, c) : xpad(h + k - 1, w, c)) * wf[c][k];
          y[h][w][c] = acc;
        end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // filters: every row bank of the broadcast buffer holds all 32 filters
    for (int r = 0; r < S; r++)
      for (int c = 0; c < C; c++)
        for (int k = 0; k < K; k++) wr(BUF_BCAST, r, WBASE + c * K + k, wf[c][k]);
    wr_end();
    filter_pass(1'b1);
    filter_pass(1'b0);

    // pointwise: top bank o holds column o of the 32 x 64 weight matrix
    for (int o = 0; o < COUT; o++)
      for (int c = 0; c < C; c++) wr(BUF_TOP, o, c, wp[c][o]);
    wr_end();
    for (int p0 = 0; p0 < HW * HW; p0 += S) begin
      for (int r = 0; r < S; r++) begin
        p = p0 + r;
        for (int c = 0; c < C; c++) wr(BUF_LEFT, r, c, y[p / HW][p % HW][c]);
      end
      wr_end();
      cm = '0;
      cm.mode = MODE_GEMM; cm.len = C; cm.in_base = 0; cm.w_base = 0; cm.out_base = 0;
      run(cm);
      for (int r = 0; r < S; r++)
        for (int o = 0; o < COUT; o++) begin
          p = p0 + r;
          acc = 0;
          for (int c = 0; c < C; c++) acc += y[p / HW][p % HW][c] * wp[c][o];
          rd(o, r, got);
          check(got == acc, $sformatf("pointwise pixel %0d oc %0d", p, o));
        end
    end

    check(n_fuse == 2 * 2 * CH * 2, "number of FuSe folds");
    check(n_gemm == HW * HW / S, "number of GEMM folds");
    check(n_partial > 0, "partial column folds");
    $display("folds: fuse=%0d (partial %0d) gemm=%0d", n_fuse, n_partial, n_gemm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
