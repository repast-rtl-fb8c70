// tb_mul_unit: random Q8.8 products with rounding and saturation, checked one
// clock after vld_i.
`timescale 1ns/1ps
module tb_mul_unit;
  import repast_pkg::*;
  localparam int unsigned L = 4, W = 16, F = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic vld_i, vld_o;
  logic signed [L-1:0][W-1:0] a, b, p;
  mul_unit #(.LANES(L), .W(W), .FRAC(F)) dut (.*);
  initial begin
    vld_i = 0; a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      longint e [L];
      @(negedge clk);
      vld_i = 1;
      for (int i = 0; i < L; i++) begin
        int av, bv;
        av = int'($urandom_range(0, 65535)) - 32768;
        bv = (t < 50) ? int'($urandom_range(0, 1024)) - 512 : int'($urandom_range(0, 65535)) - 32768;
        a[i] = W'(av); b[i] = W'(bv);
        e[i] = (longint'(av) * longint'(bv) + 128) >>> F;
        if (e[i] > 32767) e[i] = 32767;
        if (e[i] < -32768) e[i] = -32768;
      end
      @(negedge clk);
      vld_i = 0;
      checks++;
      if (!vld_o) begin failures++; $display("FAIL vld_o"); end
      for (int i = 0; i < L; i++) begin
        logic signed [W-1:0] g;
        g = p[i];
        checks++;
        if (longint'(g) != e[i]) begin
          failures++; $display("FAIL lane %0d got %0d exp %0d", i, g, e[i]);
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
