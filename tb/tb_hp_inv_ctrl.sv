// tb_hp_inv_ctrl: solves A x = b with the high-precision inversion
// controller on an 8x8 INV crossbar model and an 8x8 A_L model, and compares
// every element of x with a double-precision Gauss elimination of
// A = H/2^8 + L/2^16 done here. Also checks the number of crossbar cycles
// against N_LOOP * (2*NB*NX + QX/RDAC) and that no residual saturated.
`timescale 1ns/1ps
module tb_hp_inv_ctrl;
  import repast_pkg::*;

  localparam int unsigned N   = 8;
  localparam int unsigned TOL = 6;
  localparam int unsigned NBs = 4, NXs = 3, NXDs = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic start, busy, done;
  logic signed [N-1:0][15:0] b_in, x_out;
  logic inv_req, inv_ack, al_req, al_ack;
  xop_e inv_op;
  logic signed [N-1:0][4:0] inv_dac, al_dac;
  logic signed [N-1:0][7:0] inv_adc;
  logic signed [N-1:0][31:0] inv_vmm, al_y;
  logic [31:0] n_xb_ops, n_sat;

  logic prog_en;
  logic [2:0] prog_row;
  logic [N-1:0][7:0] prog_data;

  hp_inv_ctrl #(.NV(N)) dut (
    .clk, .rst_n, .start, .b_in, .busy, .done, .x_out,
    .inv_req, .inv_op, .inv_dac, .inv_ack, .inv_adc, .inv_vmm,
    .al_req, .al_dac, .al_ack, .al_y, .n_xb_ops, .n_sat);

  inv_fabric #(.N_XB(1), .XB(N), .GMAX(1)) fab (
    .clk, .rst_n, .prog_en, .prog_xb(1'b0), .prog_row, .prog_data,
    .cfg_mode(INV_SINGLE), .cfg_g(3'd1), .req(inv_req), .op(inv_op), .grp(1'b0),
    .dac(inv_dac), .ack(inv_ack), .adc(inv_adc), .vmm(inv_vmm));

  // A_L on VMM crossbars: bitline sums of L * d, one crossbar cycle.
  int L [N][N];
  int H [N][N];
  always_ff @(posedge clk) begin
    al_ack <= al_req;
    if (al_req)
      for (int i = 0; i < N; i++) begin
        int s;
        s = 0;
        for (int j = 0; j < N; j++) s += L[i][j] * int'($signed(al_dac[j]));
        al_y[i] <= s;
      end
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Reference solve in double precision.
  function automatic void gauss_solve(input real a_in [N][N], input real bb [N], output real x [N]);
    real a [N][N+1];
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) a[i][j] = a_in[i][j];
      a[i][N] = bb[i];
    end
    for (int c = 0; c < N; c++) begin
      int p; real t;
      p = c;
      for (int r = c + 1; r < N; r++) if (fabs(a[r][c]) > fabs(a[p][c])) p = r;
      for (int j = 0; j <= N; j++) begin t = a[c][j]; a[c][j] = a[p][j]; a[p][j] = t; end
      for (int r = 0; r < N; r++) if (r != c) begin
        t = a[r][c] / a[c][c];
        for (int j = 0; j <= N; j++) a[r][j] -= t * a[c][j];
      end
    end
    for (int i = 0; i < N; i++) x[i] = a[i][N] / a[i][i];
  endfunction

  initial begin
    start = 0; prog_en = 0; prog_row = '0; prog_data = '0; b_in = '0;
    al_ack = 0; al_y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 3; trial++) begin
      real am [N][N];
      real bb [N];
      real xr [N];
      int t0, cyc;
      int diag;
      diag = (trial == 1) ? 150 : 200;
      for (int i = 0; i < N; i++)
        for (int j = i; j < N; j++) begin
          H[i][j] = (i == j) ? diag : int'($urandom_range(0, 3));
          H[j][i] = H[i][j];
          L[i][j] = int'($urandom_range(0, 255));
          L[j][i] = L[i][j];
        end
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        prog_en = 1; prog_row = 3'(i);
        for (int j = 0; j < N; j++) prog_data[j] = 8'(H[i][j]);
      end
      @(negedge clk) prog_en = 0;
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) am[i][j] = real'(H[i][j]) / 256.0 + real'(L[i][j]) / 65536.0;
        b_in[i] = 16'(int'($urandom_range(0, 30000)) - 15000);
        bb[i] = real'($signed(b_in[i]));
      end
      gauss_solve(am, bb, xr);
      @(negedge clk) start = 1;
      t0 = $time / 10;
      @(negedge clk) start = 0;
      wait (done);
      cyc = $time / 10 - t0;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        real e;
        e = real'(int'($signed(x_out[i]))) - xr[i];
        checks++;
        if (fabs(e) > real'(TOL)) begin
          failures++;
          $display("FAIL trial %0d x[%0d]=%0d ref=%f", trial, i, int'($signed(x_out[i])), xr[i]);
        end
      end
      checks++;
      if (n_xb_ops != N_LOOP * (2 * NBs * NXs + NXDs)) begin
        failures++;
        $display("FAIL crossbar cycles %0d", n_xb_ops);
      end
      // each crossbar cycle is a request and an acknowledge clock, plus one
      // clock per Loop x and Loop A iteration and one for the result
      checks++;
      if (cyc != 2 * N_LOOP * (2 * NBs * NXs + NXDs) + N_LOOP * NXs + N_LOOP + 1) begin
        failures++;
        $display("FAIL latency %0d clocks", cyc);
      end
      checks++;
      if (n_sat != 0) begin failures++; $display("FAIL %0d residual saturations", n_sat); end
      $display("trial %0d: %0d crossbar cycles, %0d clocks", trial, n_xb_ops, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
