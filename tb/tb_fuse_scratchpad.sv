// tb_fuse_scratchpad: self-checking test of the banked scratchpad.
// Writes random words to random banks and addresses (several banks per cycle), keeps a
// shadow copy, and reads every bank every cycle at random addresses, checking the one-cycle
// read latency and read-old-data on a same-cycle write.
`timescale 1ns/1ps
module tb_fuse_scratchpad;
  localparam int unsigned NBANKS = 4;
  localparam int unsigned DEPTH  = 16;
  localparam int unsigned WIDTH  = 16;
  localparam int unsigned AW     = $clog2(DEPTH);

  logic clk = 1'b0;
  logic             we    [NBANKS];
  logic [AW-1:0]    waddr [NBANKS];
  logic [WIDTH-1:0] wdata [NBANKS];
  logic [AW-1:0]    raddr [NBANKS];
  logic [WIDTH-1:0] rdata [NBANKS];

  logic [WIDTH-1:0] shadow [NBANKS][DEPTH];
  logic [WIDTH-1:0] expect_q [NBANKS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fuse_scratchpad #(.NBANKS(NBANKS), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word first so that every read has a known value
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      for (int b = 0; b < NBANKS; b++) begin
        we[b] = 1'b1; waddr[b] = AW'(a); wdata[b] = WIDTH'($urandom);
        shadow[b][a] = wdata[b]; raddr[b] = '0;
      end
    end
    @(negedge clk);
    for (int b = 0; b < NBANKS; b++) we[b] = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int b = 0; b < NBANKS; b++) begin
        we[b]    = 1'($urandom);
        waddr[b] = AW'($urandom);
        wdata[b] = WIDTH'($urandom);
        raddr[b] = (i % 7 == 0) ? waddr[b] : AW'($urandom);
        expect_q[b] = shadow[b][raddr[b]];
      end
      @(posedge clk);
      for (int b = 0; b < NBANKS; b++)
        if (we[b]) shadow[b][waddr[b]] = wdata[b];
      #1;
      for (int b = 0; b < NBANKS; b++) begin
        checks++;
        if (rdata[b] !== expect_q[b]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d: %h expected %h", b, rdata[b], expect_q[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
