// tb_shift_add: drives random sequences of CLEAR / SHADD / ADD / SUB on four
// lanes and compares every registered result with a reference accumulator;
// each operation takes effect one clock after it is presented.
`timescale 1ns/1ps
module tb_shift_add;
  import repast_pkg::*;
  localparam int unsigned L = 4, IW = 24, AW = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en; sa_op_e op; logic [5:0] shift;
  logic signed [L-1:0][IW-1:0] din;
  logic signed [L-1:0][AW-1:0] acc;
  longint ref_acc [L];
  shift_add #(.LANES(L), .IN_W(IW), .ACC_W(AW)) dut (.*);
  initial begin
    en = 0; op = SA_CLEAR; shift = '0; din = '0;
    for (int i = 0; i < L; i++) ref_acc[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      op = (t % 25 == 0) ? SA_CLEAR : sa_op_e'($urandom_range(1, 3));
      shift = 6'($urandom_range(0, 4));
      for (int i = 0; i < L; i++) din[i] = IW'(int'($urandom_range(0, 200000)) - 100000);
      if (en)
        for (int i = 0; i < L; i++) begin
          longint d;
          logic signed [IW-1:0] dv;
          dv = din[i];
          d = longint'(dv);
          unique case (op)
            SA_CLEAR: ref_acc[i] = 0;
            SA_SHADD: ref_acc[i] = (ref_acc[i] <<< shift) + d;
            SA_ADD:   ref_acc[i] = ref_acc[i] + (d <<< shift);
            SA_SUB:   ref_acc[i] = ref_acc[i] - (d <<< shift);
          endcase
          ref_acc[i] = longint'(AW'(ref_acc[i]));
          if (ref_acc[i] >= (longint'(1) <<< (AW - 1))) ref_acc[i] -= (longint'(1) <<< AW);
        end
      @(posedge clk); #1;
      for (int i = 0; i < L; i++) begin
        logic signed [AW-1:0] g;
        g = acc[i];
        checks++;
        if (longint'(g) != ref_acc[i]) begin
          failures++;
          $display("FAIL t=%0d lane %0d got %0d exp %0d", t, i, longint'(g), ref_acc[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
