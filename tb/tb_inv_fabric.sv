// tb_inv_fabric: four 4x4 INV crossbars (lanes of two), programmed with
// random non-symmetric diagonally dominant codes. For the single, 2x2 grid
// and fused configurations it applies random DAC vectors in INV and VMM mode
// and compares adc and vmm with a double-precision reference (one LSB of
// slack for rounding order); the answer must come one clock after req.
`timescale 1ns/1ps
module tb_inv_fabric;
  import repast_pkg::*;
  localparam int unsigned NX = 4, X = 4, GM = 2, NL = GM * X;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic prog_en, req, ack;
  logic [1:0] prog_xb, grp;
  logic [1:0] prog_row;
  logic [X-1:0][7:0] prog_data;
  inv_mode_e cfg_mode; logic [2:0] cfg_g; xop_e op;
  logic signed [NL-1:0][4:0] dac;
  logic signed [NL-1:0][7:0] adc;
  logic signed [NL-1:0][31:0] vmm;
  int C [NX][X][X];
  inv_fabric #(.N_XB(NX), .XB(X), .GMAX(GM)) dut (.*);

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Reference matrix of a configuration (in code units).
  function automatic void refm(input inv_mode_e md, input int g, input int k, output real m [NL][NL]);
    for (int i = 0; i < NL; i++) for (int j = 0; j < NL; j++) m[i][j] = 0.0;
    for (int i = 0; i < g * X; i++)
      for (int j = 0; j < g * X; j++)
        if (md == INV_FUSED) begin
          real s;
          s = 0.0;
          for (int t = 0; t < X; t++) s += real'(C[k*2*g + i/X][i%X][t] * C[k*2*g + g + j/X][t][j%X]);
          m[i][j] = s / 256.0;
        end else m[i][j] = real'(C[k*g*g + (i/X)*g + j/X][i%X][j%X]);
  endfunction

  function automatic void ref_solve(input int n, input real m [NL][NL], input real d [NL], output real x [NL]);
    real a [NL][NL+1];
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < n; j++) a[i][j] = m[i][j] / 256.0;
      a[i][n] = d[i];
    end
    for (int c = 0; c < n; c++)
      for (int r = 0; r < n; r++) if (r != c) begin
        real f;
        f = a[r][c] / a[c][c];
        for (int j = 0; j <= n; j++) a[r][j] -= f * a[c][j];
      end
    for (int i = 0; i < n; i++) x[i] = a[i][n] / a[i][i];
  endfunction

  task automatic run(input inv_mode_e md, input int g, input int k);
    real m [NL][NL];
    real d [NL], x [NL];
    refm(md, g, k, m);
    cfg_mode = md; cfg_g = 3'(g); grp = 2'(k);
    for (int t = 0; t < 10; t++) begin
      for (int j = 0; j < NL; j++) begin
        int v;
        v = (j < g * X) ? int'($urandom_range(0, 30)) - 15 : 0;
        dac[j] = 5'(v); d[j] = real'(v);
      end
      ref_solve(g * X, m, d, x);
      op = (t % 2 == 0) ? XOP_INV : XOP_VMM;
      req = 1;
      @(negedge clk);
      req = 0;
      checks++;
      if (!ack) begin failures++; $display("FAIL ack"); end
      for (int i = 0; i < g * X; i++) begin
        real e, gv;
        logic signed [7:0] a8;
        logic signed [31:0] v32;
        a8 = adc[i]; v32 = vmm[i];
        if (op == XOP_INV) begin
          e = x[i] * 4.0;
          if (e > 127.0) e = 127.0;
          if (e < -128.0) e = -128.0;
          gv = real'(a8);
        end else begin
          e = 0.0;
          for (int j = 0; j < g * X; j++) e += m[i][j] * d[j];
          gv = real'(v32);
        end
        checks++;
        if (fabs(gv - e) > 1.0) begin
          failures++; $display("FAIL mode %0d op %0d lane %0d got %f exp %f", md, op, i, gv, e);
        end
      end
    end
  endtask

  initial begin
    prog_en = 0; req = 0; prog_xb = '0; prog_row = '0; prog_data = '0; grp = '0;
    cfg_mode = INV_SINGLE; cfg_g = 3'd1; op = XOP_INV; dac = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < NX; q++)
      for (int r = 0; r < X; r++) begin
        for (int c = 0; c < X; c++) begin
          C[q][r][c] = (r == c && (q == 0 || q == 3)) ? int'($urandom_range(180, 250)) : int'($urandom_range(0, 12));
          if (r == c && (q == 1 || q == 2)) C[q][r][c] = int'($urandom_range(180, 250));
          prog_data[c] = 8'(C[q][r][c]);
        end
        prog_en = 1; prog_xb = 2'(q); prog_row = 2'(r);
        @(negedge clk);
      end
    prog_en = 0;
    run(INV_SINGLE, 1, 0);
    run(INV_SINGLE, 1, 3);
    // grid: make off-diagonal blocks small again so the 8x8 matrix is well conditioned
    for (int q = 1; q < 3; q++)
      for (int r = 0; r < X; r++) begin
        for (int c = 0; c < X; c++) begin
          C[q][r][c] = int'($urandom_range(0, 12));
          prog_data[c] = 8'(C[q][r][c]);
        end
        prog_en = 1; prog_xb = 2'(q); prog_row = 2'(r);
        @(negedge clk);
      end
    prog_en = 0;
    run(INV_GRID, 2, 0);
    // fused: A1 = crossbar 0, A2 = crossbar 1 (make it diagonally dominant)
    for (int r = 0; r < X; r++) begin
      for (int c = 0; c < X; c++) begin
        C[1][r][c] = (r == c) ? int'($urandom_range(200, 250)) : int'($urandom_range(0, 12));
        prog_data[c] = 8'(C[1][r][c]);
      end
      prog_en = 1; prog_xb = 2'd1; prog_row = 2'(r);
      @(negedge clk);
    end
    prog_en = 0;
    run(INV_FUSED, 1, 0);
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
