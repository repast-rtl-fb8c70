// sub_tile: one RePAST sub-tile, the VMM side.
//
// Holds N_VMM ReRAM VMM crossbars with their S+A, an input register (IR),
// an output register (OR), an element-wise multiplier (Mul) and an
// activation unit (Act). Its INV crossbar is modelled, together with the
// analog wires and switches that join INV crossbars across the tile, in the
// tile-level inv_fabric.
//
// Local VMM (`vmm_start`): y = W^T v for a 16-bit input vector v of XB
// elements and QW-bit unsigned weights W. The weight of row w, column b is
// split into CPW = QW/RC cell slices stored in crossbars vmm_xb ..
// vmm_xb+CPW-1 (most significant first); the input is split into
// NS = QIN/RDAC sign-magnitude DAC slices. The sequence is
//   LOAD   read XB*16/256 words of v from IR (one per clock),
//   SLICE  per DAC slice: all CPW crossbars compute in one crossbar cycle;
//          the cell slices are weighted 2^(RC*(CPW-1-c)) and the S+A folds
//          the slices MSB first: acc = (acc << RDAC) + sum,
//   POST   per 16-lane word: y >>> vmm_shift, saturated to 16 bits, times
//          the Mul scale (Q8.8), through Act, written to OR.
// `vmm_done` pulses at the end. Crossbar cycles per VMM: NS.
//
// A_L port (`al_en`): the last CPW crossbars hold one 256x256 block of the
// low part A_L of a matrix being inverted (8-bit codes, CPW_L = 2 cells).
// `al_dac` is applied to both and `al_y` = (bl_hi << RC) + bl_lo is
// returned one clock later with `al_vld`; the tile adds the blocks.
//
// Follows the paper: crossbar counts, IR 4 kB / OR 1 kB, Act / Mul / S+A per
// sub-tile, bit-slicing of inputs and weights with shift-and-add. This
// design's choices: unsigned weight codes, the order VMM -> Mul -> Act -> OR,
// a broadcast Mul scale, the fixed placement of the A_L block.
module sub_tile
  import repast_pkg::*;
#(
  parameter int unsigned N_VMM = 28,
  parameter int unsigned XB    = 256,
  parameter int unsigned RC    = 4,
  parameter int unsigned RDAC  = 4,
  parameter int unsigned QW    = 16,
  parameter int unsigned QIN   = 16,
  parameter int unsigned KL    = 8,      // bits of an A_L code
  parameter int unsigned BL_W  = 24,
  localparam int unsigned DACW = RDAC + 1,
  localparam int unsigned CPW  = QW / RC,
  localparam int unsigned CPL  = KL / RC,
  localparam int unsigned NS   = QIN / RDAC,
  localparam int unsigned WPV  = XB * 16 / 256,   // IR/OR words per vector
  localparam int unsigned IR_AW = $clog2(4096 * 8 / 256),
  localparam int unsigned OR_AW = $clog2(1024 * 8 / 256),
  localparam int unsigned XW   = $clog2(N_VMM),
  localparam int unsigned RAW  = $clog2(XB),
  localparam int unsigned SUM_W = BL_W + RC * (CPW - 1) + 3,
  localparam int unsigned ACC_W = SUM_W + RDAC * (NS - 1) + 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // crossbar programming
  input  logic                             prog_en,
  input  logic [XW-1:0]                    prog_xb,
  input  logic [RAW-1:0]                   prog_row,
  input  logic [XB-1:0][RC-1:0]            prog_data,
  // IR write / OR read from the tile bus
  input  logic                             ir_we,
  input  logic [IR_AW-1:0]                 ir_addr,
  input  logic [255:0]                     ir_wdata,
  input  logic [OR_AW-1:0]                 or_addr,
  output logic [255:0]                     or_rdata,
  // local VMM
  input  logic                             vmm_start,
  input  logic [XW-1:0]                    vmm_xb,
  input  logic [IR_AW-1:0]                 vmm_ir_base,
  input  logic [OR_AW-1:0]                 vmm_or_base,
  input  logic [5:0]                       vmm_shift,
  input  logic signed [15:0]               vmm_scale,
  input  act_e                             vmm_act,
  output logic                             vmm_busy,
  output logic                             vmm_done,
  output logic [31:0]                      n_xb_cycles,
  // A_L block for the high-precision inversion
  input  logic                             al_en,
  input  logic signed [XB-1:0][DACW-1:0]   al_dac,
  output logic                             al_vld,
  output logic signed [XB-1:0][31:0]       al_y
);

  typedef enum logic [2:0] {V_IDLE, V_LOAD, V_SLICE, V_WAIT, V_POST, V_DONE} vstate_e;

  typedef logic signed [15:0] e16_t;

  vstate_e                 vs;
  logic [7:0]              cnt;
  e16_t                    vin [XB];
  logic [N_VMM-1:0]        xb_compute;
  logic signed [XB-1:0][DACW-1:0]  local_dac;
  logic signed [XB-1:0][DACW-1:0]  xb_dac [N_VMM];
  logic signed [XB-1:0][BL_W-1:0]  bl [N_VMM];
  logic [N_VMM-1:0]                bl_vld;

  // ---------------- crossbars ----------------
  for (genvar x = 0; x < N_VMM; x++) begin : g_xb
    assign xb_dac[x] = (al_en && x >= N_VMM - CPL) ? al_dac : local_dac;
    vmm_xbar #(.ROWS(XB), .COLS(XB), .CELL(RC), .DACW(DACW), .OUT_W(BL_W)) u_xb (
      .clk, .rst_n,
      .prog_en (prog_en && prog_xb == XW'(x)),
      .prog_row, .prog_data,
      .compute (xb_compute[x] || (al_en && x >= N_VMM - CPL)),
      .dac     (xb_dac[x]),
      .bl      (bl[x]),
      .bl_vld  (bl_vld[x]));
  end

  always_comb begin
    xb_compute = '0;
    if (vs == V_SLICE)
      for (int x = 0; x < N_VMM; x++)
        if (x >= int'(vmm_xb) && x < int'(vmm_xb) + CPW) xb_compute[x] = 1'b1;
    for (int w = 0; w < XB; w++)
      local_dac[w] = dac_slice(longint'(vin[w]), int'(cnt), NS);
  end

  // A_L block: two cell slices, high one first.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) al_vld <= 1'b0;
    else        al_vld <= al_en;
  end
  always_comb begin
    for (int b = 0; b < XB; b++) begin
      logic signed [31:0] s;
      s = '0;
      for (int c = 0; c < CPL; c++)
        s = s + (32'($signed(bl[N_VMM - CPL + c][b])) <<< (RC * (CPL - 1 - c)));
      al_y[b] = s;
    end
  end

  // ---------------- S+A of the local VMM ----------------
  logic signed [XB-1:0][SUM_W-1:0] csum;
  logic signed [XB-1:0][ACC_W-1:0] acc;
  sa_op_e  sa_op;
  logic    sa_en;

  always_comb begin
    for (int b = 0; b < XB; b++) begin
      logic signed [SUM_W-1:0] s;
      s = '0;
      for (int c = 0; c < CPW; c++)
        s = s + (SUM_W'($signed(bl[int'(vmm_xb) + c][b])) <<< (RC * (CPW - 1 - c)));
      csum[b] = s;
    end
  end

  shift_add #(.LANES(XB), .IN_W(SUM_W), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .en(sa_en), .op(sa_op), .shift(6'(RDAC)), .din(csum), .acc(acc));

  // ---------------- IR / OR ----------------
  logic [IR_AW-1:0] ir_a;
  logic [255:0]     ir_rdata;
  logic             or_we;
  logic [OR_AW-1:0] or_a;
  logic [255:0]     or_wdata;

  io_reg #(.BYTES(4096), .WORD_W(256)) u_ir (
    .clk, .we(ir_we), .addr(ir_a), .wdata(ir_wdata), .rdata(ir_rdata));
  io_reg #(.BYTES(1024), .WORD_W(256)) u_or (
    .clk, .we(or_we), .addr(or_a), .wdata(or_wdata), .rdata(or_rdata));

  assign ir_a = (vs == V_LOAD) ? vmm_ir_base + IR_AW'(cnt) : ir_addr;

  // ---------------- Mul -> Act -> OR ----------------
  logic signed [15:0][15:0] post_in, mul_out, act_out;
  logic signed [15:0][15:0] scale_v;
  logic mul_vld, act_vld, post_vld;
  logic [7:0] wr_cnt;

  always_comb begin
    for (int k = 0; k < 16; k++) begin
      int unsigned idx;
      logic signed [ACC_W-1:0] v;
      idx = int'(cnt) * 16 + k;
      if (idx < XB) v = $signed(acc[idx]) >>> vmm_shift;
      else          v = '0;
      post_in[k] = 16'(sat(longint'(v), 16));
      scale_v[k] = vmm_scale;
    end
  end
  assign post_vld = (vs == V_POST);

  mul_unit #(.LANES(16), .W(16), .FRAC(8)) u_mul (
    .clk, .rst_n, .vld_i(post_vld), .a(post_in), .b(scale_v), .vld_o(mul_vld), .p(mul_out));
  act_unit #(.LANES(16), .W(16)) u_act (
    .clk, .rst_n, .mode(vmm_act), .vld_i(mul_vld), .din(mul_out), .vld_o(act_vld), .dout(act_out));

  assign or_we    = act_vld;
  assign or_wdata = act_out;
  assign or_a     = act_vld ? vmm_or_base + OR_AW'(wr_cnt) : or_addr;

  // ---------------- sequencer ----------------
  always_comb begin
    sa_en = 1'b0;
    sa_op = SA_SHADD;
    if (vs == V_IDLE && vmm_start) begin
      sa_en = 1'b1;
      sa_op = SA_CLEAR;
    end else if (vs == V_WAIT && bl_vld[vmm_xb]) begin
      sa_en = 1'b1;
    end
  end

  assign vmm_busy = (vs != V_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs          <= V_IDLE;
      cnt         <= '0;
      wr_cnt      <= '0;
      vmm_done    <= 1'b0;
      n_xb_cycles <= '0;
      vin         <= '{default: '0};
    end else begin
      vmm_done <= 1'b0;
      if (act_vld) wr_cnt <= wr_cnt + 1;
      unique case (vs)
        V_IDLE: if (vmm_start) begin
          cnt    <= '0;
          wr_cnt <= '0;
          vs     <= V_LOAD;
        end
        // IR read has one clock latency: word cnt-1 arrives while cnt is sent
        V_LOAD: begin
          if (cnt != 0)
            for (int k = 0; k < 16; k++)
              if ((int'(cnt) - 1) * 16 + k < XB) vin[(int'(cnt) - 1) * 16 + k] <= $signed(ir_rdata[k*16 +: 16]);
          if (cnt == 8'(WPV)) begin
            cnt <= '0;
            vs  <= V_SLICE;
          end else begin
            cnt <= cnt + 1;
          end
        end
        V_SLICE: begin
          n_xb_cycles <= n_xb_cycles + 1;
          vs <= V_WAIT;
        end
        V_WAIT: if (bl_vld[vmm_xb]) begin
          if (cnt == 8'(NS - 1)) begin
            cnt <= '0;
            vs  <= V_POST;
          end else begin
            cnt <= cnt + 1;
            vs  <= V_SLICE;
          end
        end
        V_POST: begin
          if (cnt == 8'(WPV - 1)) begin
            cnt <= '0;
            vs  <= V_DONE;
          end else begin
            cnt <= cnt + 1;
          end
        end
        V_DONE: if (!mul_vld && !act_vld) begin
          vmm_done <= 1'b1;
          vs       <= V_IDLE;
        end
        default: vs <= V_IDLE;
      endcase
    end
  end

endmodule
