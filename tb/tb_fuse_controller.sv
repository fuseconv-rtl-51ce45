// tb_fuse_controller: self-checking test of the fold sequencer.
// Runs GEMM and FuSe folds with random fields and checks, cycle by cycle after the start
// pulse: one clear cycle, the STREAM length (len+2S for GEMM, ncols+len+1 for FuSe) with
// mac_en high, S drain cycles, the done pulse, DataEn, and, for every stream cycle t, the
// read address and (one cycle later) the valid flag of every left, top and broadcast bank,
// plus the drain write mask and address. The expected values are the address formulas of
// the two folds written out independently here.
`timescale 1ns/1ps
module tb_fuse_controller;
  import fuse_pkg::*;
  localparam int unsigned S  = 4;
  localparam int unsigned AW = 8;

  logic clk = 1'b0;
  logic rst_n, start, busy, done, data_en, clear, mac_en, drain, bc_valid;
  cmd_t cmd;
  logic [AW-1:0] left_raddr [S], top_raddr [S], bc_raddr, out_waddr;
  logic          left_valid [S], top_valid [S], out_we [S];

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fuse_controller #(.S(S), .AW(AW)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
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

  task automatic run(input cmd_t c);
    int nstream, t0, ptop;
    bit lv_prev [S], tv_prev [S], bv_prev;
    bit lv, tv, bv;
    int k;
    nstream = (c.mode == MODE_GEMM) ? int'(c.len) + 2 * S : int'(c.ncols) + int'(c.len) + 1;
    t0   = int'(c.ncols) - 1;
    ptop = int'(c.col_off) + int'(c.ncols) + int'(c.len) - 2;
    @(negedge clk);
    cmd = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0; cmd = '0;           // the controller must have latched the command
    check(busy && clear && !mac_en && !drain, "clear cycle");
    check(data_en == (c.mode == MODE_FUSE), "DataEn");
    for (int i = 0; i < S; i++) begin lv_prev[i] = 0; tv_prev[i] = 0; end
    bv_prev = 0;
    for (int t = 0; t < nstream; t++) begin
      @(negedge clk);
      check(busy && mac_en && !clear && !drain && !done, $sformatf("stream cycle %0d", t));
      // valid flags seen now belong to the reads issued in the previous cycle
      for (int i = 0; i < S; i++) begin
        check(left_valid[i] == lv_prev[i], $sformatf("left_valid[%0d] t=%0d", i, t));
        check(top_valid[i]  == tv_prev[i], $sformatf("top_valid[%0d] t=%0d", i, t));
      end
      check(bc_valid == bv_prev, $sformatf("bc_valid t=%0d", t));
      for (int i = 0; i < S; i++) begin
        if (c.mode == MODE_GEMM) begin
          k  = t - i;
          lv = (k >= 0) && (k < int'(c.len));
          tv = lv;
          if (lv) begin
            check(left_raddr[i] == AW'(int'(c.in_base) + k), $sformatf("GEMM left addr r%0d t%0d", i, t));
            check(top_raddr[i]  == AW'(int'(c.w_base) + k),  $sformatf("GEMM top addr c%0d t%0d", i, t));
          end
        end else begin
          lv = (t <= ptop - int'(c.col_off));
          tv = 0;
          if (lv) check(left_raddr[i] == AW'(int'(c.in_base) + ptop - t),
                        $sformatf("FuSe left addr r%0d t%0d", i, t));
        end
        lv_prev[i] = lv; tv_prev[i] = tv;
      end
      bv = (c.mode == MODE_FUSE) && (t >= t0) && (t - t0 < int'(c.len));
      if (bv) check(bc_raddr == AW'(int'(c.w_base) + int'(c.len) - 1 - (t - t0)),
                    $sformatf("bcast addr t%0d", t));
      bv_prev = bv;
    end
    for (int d = 0; d < S; d++) begin
      @(negedge clk);
      check(busy && drain && !mac_en && !done, $sformatf("drain cycle %0d", d));
      check(out_waddr == AW'(int'(c.out_base) + S - 1 - d), $sformatf("drain addr %0d", d));
      for (int col = 0; col < S; col++)
        check(out_we[col] == ((c.mode == MODE_GEMM) || (col < int'(c.ncols))),
              $sformatf("drain mask col %0d", col));
    end
    @(negedge clk);
    check(done && !busy && !drain, "done pulse");
    @(negedge clk);
    check(!done && !busy, "idle after done");
  endtask

  initial begin
    cmd_t c;
    rst_n = 1'b0; start = 1'b0; cmd = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      c = '0;
      c.mode     = (n % 2 == 0) ? MODE_GEMM : MODE_FUSE;
      c.len      = CNT_W'($urandom_range(1, 9));
      c.ncols    = CNT_W'($urandom_range(1, S));
      c.col_off  = CNT_W'($urandom_range(0, 20));
      c.in_base  = CNT_W'($urandom_range(0, 100));
      c.w_base   = CNT_W'($urandom_range(0, 100));
      c.out_base = CNT_W'($urandom_range(0, 100));
      run(c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
