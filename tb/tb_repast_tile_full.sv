// tb_repast_tile_full: the tile at its default size (256x256 crossbars,
// 16 INV crossbars as a 4x4 grid, 16 sub-tiles of 28 VMM crossbars, 512 kB
// buffer, 256-bit bus). It programs a 1024x1024 matrix (A_H on the INV grid,
// A_L on the A_L crossbars of all sub-tiles), solves A x = b with C_HPINV and
// checks x against a double-precision solve and the 504 crossbar cycles; it
// then solves a fused 256x256 system (A1*A2 on two INV crossbars). The
// matrices are sparse so that the Taylor series of the inversion converges
// at this size (the spectral radius of A_H^-1 A_L stays well below 1).
`timescale 1ns/1ps
module tb_repast_tile_full;
  import repast_pkg::*;

  localparam int unsigned XBs = 256, G = 4, NS = 16, NVM = 28, NV = G * XBs;
  localparam int unsigned TOL = 6;
  // The fused product A1*A2/2^8 is not an integer code, so every residual
  // VMM slice is rounded by the ADC (up to 0.5 * 2^12 / 2^8 LSB of b for the
  // top slice); the fused solve is therefore checked to a wider tolerance,
  // wider here than in the reduced test because the worst of 256 lanes is
  // taken instead of the worst of 16.
  localparam int unsigned TOL_FUSED = 48;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_grid = 0, n_fused = 0, n_ops_ok = 0;

  logic h_req, h_we, h_gnt, h_rvalid;
  logic [13:0] h_addr;
  logic [255:0] h_wdata, h_rdata;
  logic cmd_valid, cmd_ready;
  tile_cmd_t cmd;
  logic [XBs-1:0][7:0] prog_data;
  logic [31:0] hp_xb_ops, hp_sat, n_cmds, vmm_xb_cycles;
  logic hp_busy;
  logic [NS-1:0] sub_busy;

  repast_tile dut (.*);


  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic void gauss_solve(input int n, input real a_in [NV][NV], input real bb [NV],
                                      output real x [NV]);
    real a [NV][NV+1];
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < n; j++) a[i][j] = a_in[i][j];
      a[i][n] = bb[i];
    end
    for (int c = 0; c < n; c++) begin
      int p; real t;
      p = c;
      for (int r = c + 1; r < n; r++) if (fabs(a[r][c]) > fabs(a[p][c])) p = r;
      for (int j = 0; j <= n; j++) begin t = a[c][j]; a[c][j] = a[p][j]; a[p][j] = t; end
      for (int r = 0; r < n; r++) if (r != c) begin
        t = a[r][c] / a[c][c];
        for (int j = 0; j <= n; j++) a[r][j] -= t * a[c][j];
      end
    end
    for (int i = 0; i < n; i++) x[i] = a[i][n] / a[i][i];
  endfunction

  task automatic issue(input tile_cmd_t cc);
    wait (cmd_ready);
    @(negedge clk);
    cmd = cc; cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0;
    wait (cmd_ready);
    @(negedge clk);
  endtask

  task automatic hwrite(input int a, input logic [255:0] d);
    logic g;
    g = 1'b0;
    while (!g) begin
      @(negedge clk);
      h_req = 1'b1; h_we = 1'b1; h_addr = 14'(a); h_wdata = d;
      #1 g = h_gnt;
    end
    @(negedge clk) h_req = 1'b0; h_we = 1'b0;
  endtask

  task automatic hread(input int a, output logic [255:0] d);
    logic g;
    g = 1'b0;
    while (!g) begin
      @(negedge clk);
      h_req = 1'b1; h_we = 1'b0; h_addr = 14'(a);
      #1 g = h_gnt;
    end
    @(negedge clk) h_req = 1'b0;
    while (!h_rvalid) @(negedge clk);
    d = h_rdata;
  endtask

  function automatic tile_cmd_t mk(input tcmd_e op, input int sub, input int xb, input int row,
                                   input int a, input int b, input int len);
    tile_cmd_t t;
    t = '0;
    t.op = op; t.sub = 8'(sub); t.xb = 8'(xb); t.row = 10'(row);
    t.addr_a = 16'(a); t.addr_b = 16'(b); t.len = 8'(len);
    t.mode = INV_SINGLE; t.act = ACT_NONE; t.g = 3'd1;
    return t;
  endfunction

  // A_L of sub-tile (br, bc): crossbars NVM-2 (high nibble) and NVM-1 (low).
  task automatic prog_al(input int L [NV][NV]);
    for (int s = 0; s < NS; s++)
      for (int c = 0; c < 2; c++)
        for (int r = 0; r < XBs; r++) begin
          for (int k = 0; k < XBs; k++)
            prog_data[k] = 8'((L[(s % G) * XBs + r][(s / G) * XBs + k] >> (4 * (1 - c))) & 15);
          issue(mk(C_PROG_VMM, s, NVM - 2 + c, r, 0, 0, 0));
        end
  endtask

  // Write b (two buffer words), solve, read x and compare with xr.
  task automatic run_hp(input int n, input real am [NV][NV], input int bv [NV], input int tol,
                        output int bad);
    logic [255:0] w;
    real bb [NV], xr [NV];
    for (int i = 0; i < NV; i++) bb[i] = real'(bv[i]);
    gauss_solve(n, am, bb, xr);
    for (int q = 0; q < NV / 16; q++) begin
      for (int l = 0; l < 16; l++) w[l*16 +: 16] = 16'(bv[q*16 + l]);
      hwrite(q, w);
    end
    issue(mk(C_HPINV, 0, 0, 0, 0, 100, 0));
    bad = 0;
    for (int q = 0; q < NV / 16; q++) begin
      hread(100 + q, w);
      for (int l = 0; l < 16; l++) begin
        logic signed [15:0] xv;
        int i;
        i = q * 16 + l;
        xv = w[l*16 +: 16];
        if (i < n) begin
          checks++;
          if (fabs(real'(int'(xv)) - xr[i]) > real'(tol)) begin
            failures++; bad++;
            $display("FAIL x[%0d]=%0d ref=%f", i, int'(xv), xr[i]);
          end
        end
      end
    end
    checks++;
    if (int'(hp_xb_ops) != 504) begin
      failures++; bad++;
      $display("FAIL crossbar cycles %0d", int'(hp_xb_ops));
    end else n_ops_ok++;
    checks++;
    if (hp_sat != 0) begin failures++; bad++; $display("FAIL %0d saturations", hp_sat); end
  endtask

  initial begin
    int H [NV][NV];
    int L [NV][NV];
    real am [NV][NV];
    int bv [NV];
    int bad;
    h_req = 0; h_we = 0; h_addr = '0; h_wdata = '0;
    cmd_valid = 0; cmd = '0; prog_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1. grid inversion, g = 2 ----
    for (int i = 0; i < NV; i++)
      for (int j = i; j < NV; j++) begin
        H[i][j] = (i == j) ? 200 : (($urandom_range(0, 63) == 0) ? 1 : 0);
        H[j][i] = H[i][j];
        L[i][j] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, 15)) : 0;
        L[j][i] = L[i][j];
      end
    for (int q = 0; q < G * G; q++)
      for (int r = 0; r < XBs; r++) begin
        for (int k = 0; k < XBs; k++) prog_data[k] = 8'(H[(q / G) * XBs + r][(q % G) * XBs + k]);
        issue(mk(C_PROG_INV, 0, q, r, 0, 0, 0));
      end
    prog_al(L);
    begin
      tile_cmd_t t;
      t = mk(C_CFG_INV, 0, 0, 0, 0, 0, 0);
      t.mode = INV_GRID; t.g = 3'(G);
      issue(t);
    end
    for (int i = 0; i < NV; i++) begin
      for (int j = 0; j < NV; j++) am[i][j] = real'(H[i][j]) / 256.0 + real'(L[i][j]) / 65536.0;
      bv[i] = int'($urandom_range(0, 30000)) - 15000;
    end
    run_hp(NV, am, bv, TOL, bad);
    if (bad == 0) n_grid++;

    // ---- 2. fused inversion, g = 1: A = (A1 * A2 / 2^8) / 2^8 ----
    begin
      int A1 [XBs][XBs];
      int A2 [XBs][XBs];
      tile_cmd_t t;
      for (int i = 0; i < XBs; i++)
        for (int j = 0; j < XBs; j++) begin
          A1[i][j] = (i == j) ? 240 : (($urandom_range(0, 63) == 0) ? 1 : 0);
          A2[i][j] = (i == j) ? 230 : (($urandom_range(0, 63) == 0) ? 1 : 0);
        end
      for (int r = 0; r < XBs; r++) begin
        for (int k = 0; k < XBs; k++) prog_data[k] = 8'(A1[r][k]);
        issue(mk(C_PROG_INV, 0, 0, r, 0, 0, 0));
        for (int k = 0; k < XBs; k++) prog_data[k] = 8'(A2[r][k]);
        issue(mk(C_PROG_INV, 0, 1, r, 0, 0, 0));
      end
      for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) L[i][j] = 0;
      prog_al(L);
      t = mk(C_CFG_INV, 0, 0, 0, 0, 0, 0);
      t.mode = INV_FUSED; t.g = 3'd1;
      issue(t);
      for (int i = 0; i < NV; i++)
        for (int j = 0; j < NV; j++) begin
          real s;
          s = 0.0;
          if (i < XBs && j < XBs)
            for (int k = 0; k < XBs; k++) s += real'(A1[i][k] * A2[k][j]);
          am[i][j] = s / 65536.0;
        end
      for (int i = 0; i < NV; i++) bv[i] = (i < XBs) ? int'($urandom_range(0, 30000)) - 15000 : 0;
      run_hp(XBs, am, bv, TOL_FUSED, bad);
      if (bad == 0) n_fused++;
    end

    $display("mechanisms: grid_inv=%0d fused_inv=%0d hp_cycles_ok=%0d", n_grid, n_fused, n_ops_ok);
    checks += 3;
    if (n_grid == 0)    begin failures++; $display("FAIL grid inversion never succeeded"); end
    if (n_fused == 0)   begin failures++; $display("FAIL fused inversion never succeeded"); end
    if (n_ops_ok == 0)  begin failures++; $display("FAIL 504-cycle inversion never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
