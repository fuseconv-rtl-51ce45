// tb_fuse_pe: self-checking test of one processing element.
// Drives random operands, DataEn, mac_en, drain and clear for many cycles and compares the
// PE against a cycle model kept here: horizontal and vertical operand registers, the DataEn
// multiplexer (broadcast link vs top link), the multiply-accumulate and the drain load.
`timescale 1ns/1ps
module tb_fuse_pe;
  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 32;

  logic clk = 1'b0;
  logic rst_n, data_en, clear, mac_en, drain;
  logic signed [DATA_W-1:0] left_in, top_in, bcast_in, right_out, bottom_out;
  logic signed [ACC_W-1:0]  psum_in, acc_out;

  int checks = 0, failures = 0;
  int n_bcast = 0, n_top = 0, n_drain = 0, n_clear = 0;

  always #5 clk = ~clk;

  fuse_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  longint h_m, v_m, acc_m;

  initial begin
    rst_n = 1'b0; data_en = 0; clear = 0; mac_en = 0; drain = 0;
    left_in = '0; top_in = '0; bcast_in = '0; psum_in = '0;
    h_m = 0; v_m = 0; acc_m = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      data_en  = 1'($urandom);
      clear    = ($urandom_range(40) == 0);
      drain    = ($urandom_range(10) == 0);
      mac_en   = ($urandom_range(3) != 0);
      left_in  = DATA_W'($urandom);
      top_in   = DATA_W'($urandom);
      bcast_in = DATA_W'($urandom);
      psum_in  = ACC_W'($urandom);
      // model the clock edge
      if (clear) begin
        h_m = 0; v_m = 0; acc_m = 0; n_clear++;
      end else begin
        if (drain) begin acc_m = longint'(psum_in); n_drain++; end
        else if (mac_en) acc_m = acc_m + h_m * v_m;
        h_m = longint'(left_in);
        v_m = data_en ? longint'(bcast_in) : longint'(top_in);
        if (data_en) n_bcast++; else n_top++;
      end
      @(posedge clk);
      #1;
      checks++;
      if (right_out !== DATA_W'(h_m) || bottom_out !== DATA_W'(v_m) || acc_out !== ACC_W'(acc_m)) begin
        failures++;
        if (failures < 10)
          $display("FAIL cycle %0d: h=%0d/%0d v=%0d/%0d acc=%0d/%0d", i, right_out, h_m,
                   bottom_out, v_m, acc_out, ACC_W'(acc_m));
      end
      acc_m = longint'($signed(ACC_W'(acc_m)));
    end
    checks++;
    if (n_bcast == 0 || n_top == 0 || n_drain == 0 || n_clear == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
