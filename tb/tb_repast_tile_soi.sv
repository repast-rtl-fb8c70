// tb_repast_tile_soi: SOI block sizes other than 1024 on the tile at its
// default size. A 768x768 block (the size of a BERT projection layer's
// activation statistics) is solved on a 3x3 grid of INV crossbars with its
// low part on the 3x3 leading sub-tiles; a 64x64 block (the size of a
// ResNet 1x1, 64-channel layer) is solved in a single INV crossbar whose
// unused rows hold a plain diagonal. Both are compared with a
// double-precision solve, with the 504 crossbar cycles checked each time.
`timescale 1ns/1ps
module tb_repast_tile_soi;
  import repast_pkg::*;

  localparam int unsigned XBs = 256, G = 4, NS = 16, NVM = 28, NV = G * XBs;
  localparam int unsigned TOL = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_grid = 0, n_single = 0, n_ops_ok = 0;  // 768 grid, 64 single, cycle counts

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

    // ---- 768 x 768 on a 3 x 3 grid ----
    for (int i = 0; i < NV; i++)
      for (int j = i; j < NV; j++) begin
        H[i][j] = 0; L[i][j] = 0;
        if (i < 768 && j < 768) begin
          H[i][j] = (i == j) ? 200 : (($urandom_range(0, 63) == 0) ? 1 : 0);
          L[i][j] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, 15)) : 0;
        end
        H[j][i] = H[i][j];
        L[j][i] = L[i][j];
      end
    for (int q = 0; q < 9; q++)
      for (int r = 0; r < XBs; r++) begin
        for (int k = 0; k < XBs; k++) prog_data[k] = 8'(H[(q / 3) * XBs + r][(q % 3) * XBs + k]);
        issue(mk(C_PROG_INV, 0, q, r, 0, 0, 0));
      end
    prog_al(L);
    begin
      tile_cmd_t t;
      t = mk(C_CFG_INV, 0, 0, 0, 0, 0, 0);
      t.mode = INV_GRID; t.g = 3'd3;
      issue(t);
    end
    for (int i = 0; i < NV; i++) begin
      for (int j = 0; j < NV; j++) am[i][j] = real'(H[i][j]) / 256.0 + real'(L[i][j]) / 65536.0;
      bv[i] = (i < 768) ? int'($urandom_range(0, 30000)) - 15000 : 0;
    end
    run_hp(768, am, bv, TOL, bad);
    if (bad == 0) n_grid++;

    // ---- 64 x 64 in one crossbar ----
    for (int i = 0; i < NV; i++)
      for (int j = i; j < NV; j++) begin
        H[i][j] = 0; L[i][j] = 0;
        if (i < XBs && j < XBs) H[i][j] = (i == j) ? 200 : 0;
        if (i < 64 && j < 64) begin
          H[i][j] = (i == j) ? 180 : int'($urandom_range(0, 2));
          L[i][j] = int'($urandom_range(0, 255));
        end
        H[j][i] = H[i][j];
        L[j][i] = L[i][j];
      end
    for (int r = 0; r < XBs; r++) begin
      for (int k = 0; k < XBs; k++) prog_data[k] = 8'(H[r][k]);
      issue(mk(C_PROG_INV, 0, 0, r, 0, 0, 0));
    end
    prog_al(L);
    begin
      tile_cmd_t t;
      t = mk(C_CFG_INV, 0, 0, 0, 0, 0, 0);
      t.mode = INV_SINGLE; t.g = 3'd1;
      issue(t);
    end
    for (int i = 0; i < NV; i++) begin
      for (int j = 0; j < NV; j++) am[i][j] = real'(H[i][j]) / 256.0 + real'(L[i][j]) / 65536.0;
      bv[i] = (i < 64) ? int'($urandom_range(0, 30000)) - 15000 : 0;
    end
    run_hp(XBs, am, bv, TOL, bad);
    if (bad == 0) n_single++;

    $display("solved: 768-grid=%0d 64-single=%0d hp_cycles_ok=%0d", n_grid, n_single, n_ops_ok);
    checks += 3;
    if (n_grid == 0)    begin failures++; $display("FAIL 768x768 grid solve failed"); end
    if (n_single == 0)   begin failures++; $display("FAIL 64x64 single-crossbar solve failed"); end
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
