`timescale 1ns/1ps
// tb_sub_tile: programs 16-bit weights into four VMM crossbars of a reduced
// sub-tile (16x16 crossbars, 6 of them), writes input vectors into IR, runs
// local VMMs with Mul scale and ReLU / no activation, and compares every OR
// lane with a product computed here in 64-bit integers. Also drives the A_L
// block port and checks its bitline sums, and the number of crossbar
// cycles per VMM (one per 4-bit DAC slice of the 16-bit input).
module tb_sub_tile;
  import repast_pkg::*;

  localparam int unsigned XBs = 16, NV = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en; logic [2:0] prog_xb; logic [3:0] prog_row; logic [XBs-1:0][3:0] prog_data;
  logic ir_we; logic [6:0] ir_addr; logic [255:0] ir_wdata;
  logic [4:0] or_addr; logic [255:0] or_rdata;
  logic vmm_start; logic [2:0] vmm_xb; logic [6:0] vmm_ir_base; logic [4:0] vmm_or_base;
  logic [5:0] vmm_shift; logic signed [15:0] vmm_scale; act_e vmm_act;
  logic vmm_busy, vmm_done; logic [31:0] n_xb_cycles;
  logic al_en, al_vld; logic signed [XBs-1:0][4:0] al_dac; logic signed [XBs-1:0][31:0] al_y;

  sub_tile #(.N_VMM(NV), .XB(XBs)) dut (.*);

  longint W [XBs][XBs];
  int     AL [XBs][XBs];
  int     v [XBs];

  task automatic prog_row_cells(input int xb, input int row, input logic [XBs-1:0][3:0] d);
    @(negedge clk);
    prog_en = 1; prog_xb = 3'(xb); prog_row = 4'(row); prog_data = d;
    @(negedge clk);
    prog_en = 0;
  endtask

  initial begin
    prog_en = 0; ir_we = 0; vmm_start = 0; al_en = 0; al_dac = '0;
    ir_addr = '0; ir_wdata = '0; or_addr = '0; vmm_xb = '0; vmm_ir_base = '0;
    vmm_or_base = '0; vmm_shift = '0; vmm_scale = '0; vmm_act = ACT_NONE;
    prog_xb = '0; prog_row = '0; prog_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights: cell slice c of W in crossbar c (most significant first)
    for (int w = 0; w < XBs; w++)
      for (int b = 0; b < XBs; b++) W[w][b] = longint'($urandom_range(0, 65535));
    for (int c = 0; c < 4; c++)
      for (int w = 0; w < XBs; w++) begin
        logic [XBs-1:0][3:0] d;
        for (int b = 0; b < XBs; b++) d[b] = 4'(W[w][b] >> (4 * (3 - c)));
        prog_row_cells(c, w, d);
      end
    for (int trial = 0; trial < 4; trial++) begin
      longint y;
      int t0;
      for (int w = 0; w < XBs; w++) v[w] = int'($urandom_range(0, 60000)) - 30000;
      @(negedge clk);
      ir_we = 1; ir_addr = 7'(trial);
      for (int w = 0; w < XBs; w++) ir_wdata[w*16 +: 16] = 16'(v[w]);
      @(negedge clk) ir_we = 0;
      vmm_xb = 0; vmm_ir_base = 7'(trial); vmm_or_base = 5'(trial);
      vmm_shift = 6'd20; vmm_scale = (trial % 2 == 0) ? 16'sd256 : 16'sd384;
      vmm_act = (trial < 2) ? ACT_NONE : ACT_RELU;
      vmm_start = 1;
      t0 = n_xb_cycles;
      @(negedge clk) vmm_start = 0;
      wait (vmm_done);
      @(negedge clk);
      checks++;
      if (n_xb_cycles - t0 != 4) begin failures++; $display("FAIL xb cycles %0d", n_xb_cycles - t0); end
      or_addr = 5'(trial);
      @(negedge clk);
      for (int b = 0; b < XBs; b++) begin
        longint e, r;
        logic signed [15:0] g;
        g = or_rdata[b*16 +: 16];
        y = 0;
        for (int w = 0; w < XBs; w++) y += W[w][b] * longint'(v[w]);
        e = y >>> 20;
        if (e > 32767) e = 32767; if (e < -32768) e = -32768;
        r = (e * longint'(vmm_scale) + 128) >>> 8;
        if (r > 32767) r = 32767; if (r < -32768) r = -32768;
        if (vmm_act == ACT_RELU && r < 0) r = 0;
        checks++;
        if (longint'(g) != r) begin
          failures++;
          $display("FAIL trial %0d lane %0d got %0d exp %0d", trial, b, g, r);
        end
      end
    end
    // A_L block in crossbars 4 (high cells) and 5 (low cells)
    for (int w = 0; w < XBs; w++)
      for (int b = 0; b < XBs; b++) AL[w][b] = int'($urandom_range(0, 255));
    for (int c = 0; c < 2; c++)
      for (int w = 0; w < XBs; w++) begin
        logic [XBs-1:0][3:0] d;
        for (int b = 0; b < XBs; b++) d[b] = 4'(AL[w][b] >> (4 * (1 - c)));
        prog_row_cells(4 + c, w, d);
      end
    for (int trial = 0; trial < 3; trial++) begin
      int dv [XBs];
      @(negedge clk);
      for (int w = 0; w < XBs; w++) begin
        dv[w] = int'($urandom_range(0, 30)) - 15;
        al_dac[w] = 5'(dv[w]);
      end
      al_en = 1;
      @(negedge clk) al_en = 0;
      checks++;
      if (!al_vld) begin failures++; $display("FAIL al_vld"); end
      for (int b = 0; b < XBs; b++) begin
        int s;
        s = 0;
        for (int w = 0; w < XBs; w++) s += AL[w][b] * dv[w];
        checks++;
        if (int'($signed(al_y[b])) != s) begin
          failures++; $display("FAIL al lane %0d got %0d exp %0d", b, $signed(al_y[b]), s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
