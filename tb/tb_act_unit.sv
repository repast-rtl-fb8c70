// tb_act_unit: random vectors through NONE, ReLU and leaky ReLU; checks the
// values and that the result and vld_o appear exactly one clock later.
`timescale 1ns/1ps
module tb_act_unit;
  import repast_pkg::*;
  localparam int unsigned L = 4, W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  act_e mode; logic vld_i, vld_o;
  logic signed [L-1:0][W-1:0] din, dout;
  act_unit #(.LANES(L), .W(W)) dut (.*);
  initial begin
    mode = ACT_NONE; vld_i = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int e [L];
      @(negedge clk);
      mode = act_e'(t % 3); vld_i = 1;
      for (int i = 0; i < L; i++) begin
        e[i] = int'($urandom_range(0, 60000)) - 30000;
        din[i] = W'(e[i]);
        if (mode == ACT_RELU && e[i] < 0) e[i] = 0;
        if (mode == ACT_LRELU && e[i] < 0) e[i] = e[i] >>> 3;
      end
      @(negedge clk);
      vld_i = 0;
      checks++;
      if (!vld_o) begin failures++; $display("FAIL vld_o not one clock after vld_i"); end
      for (int i = 0; i < L; i++) begin
        logic signed [W-1:0] g;
        g = dout[i];
        checks++;
        if (int'(g) != e[i]) begin
          failures++; $display("FAIL mode %0d lane %0d got %0d exp %0d", mode, i, g, e[i]);
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
