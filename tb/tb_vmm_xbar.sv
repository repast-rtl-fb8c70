// tb_vmm_xbar: programs a 16x8 crossbar with random 4-bit cells, applies
// random signed DAC slices and checks every bitline sum one clock later.
`timescale 1ns/1ps
module tb_vmm_xbar;
  localparam int unsigned R = 16, C = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic prog_en, compute, bl_vld;
  logic [3:0] prog_row;
  logic [C-1:0][3:0] prog_data;
  logic signed [R-1:0][4:0] dac;
  logic signed [C-1:0][23:0] bl;
  int G [R][C];
  vmm_xbar #(.ROWS(R), .COLS(C), .CELL(4), .DACW(5), .OUT_W(24)) dut (.*);
  initial begin
    prog_en = 0; compute = 0; prog_row = '0; prog_data = '0; dac = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin G[r][c] = int'($urandom_range(0, 15)); prog_data[c] = 4'(G[r][c]); end
      prog_en = 1; prog_row = 4'(r);
      @(negedge clk);
    end
    prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      int d [R];
      for (int r = 0; r < R; r++) begin d[r] = int'($urandom_range(0, 30)) - 15; dac[r] = 5'(d[r]); end
      compute = 1;
      @(negedge clk);
      compute = 0;
      checks++;
      if (!bl_vld) begin failures++; $display("FAIL bl_vld"); end
      for (int c = 0; c < C; c++) begin
        int e;
        logic signed [23:0] g;
        e = 0;
        for (int r = 0; r < R; r++) e += G[r][c] * d[r];
        g = bl[c];
        checks++;
        if (int'(g) != e) begin failures++; $display("FAIL col %0d got %0d exp %0d", c, g, e); end
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
