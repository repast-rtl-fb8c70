// repast_tile: one tile of the RePAST accelerator for second-order training.
//
// A tile has a 512 kB eDRAM buffer, a 256-bit bus, N_SUB sub-tiles (each with
// N_VMM VMM crossbars, IR/OR, S+A, Mul and Act), one INV crossbar per
// sub-tile joined by analog wires and switches (inv_fabric), and the
// high-precision inversion sequencer (hp_inv_ctrl). The tile executes one
// command at a time from its command port (`cmd_valid` / `cmd_ready`
// handshake, accepted when both are high):
//   C_PROG_VMM / C_PROG_INV  program one crossbar wordline from `prog_data`,
//   C_CFG_INV                set the INV switch configuration,
//   C_LOAD_IR / C_STORE_OR   move `len` 256-bit words between the buffer and
//                            a sub-tile's IR / OR over the bus,
//   C_VMM                    run a bit-sliced VMM in one sub-tile,
//   C_HPINV                  load b (NV/16 words) from the buffer, solve
//                            A x = b to 16 bits on INV group `xb`, and store x.
// The host reaches the buffer through the bus too (`h_*`, master 0); the
// tile's own data mover is master 1, so host traffic and a running command
// contend for the bus and are arbitrated round-robin.
//
// For the inversion, A_H lives on the INV crossbars and A_L (the low 8 bits)
// in the last two VMM crossbars of sub-tiles: sub-tile br*GMAX + bc holds
// block (br, bc) of A_L; their bitline sums are added per block row here
// (the digital adders that join a matrix split over crossbars).
//
// Follows the paper: the tile composition, crossbar and buffer sizes, the
// 256-bit bus, the INV/VMM cooperation for high-precision inversion. This
// design's choices: the command set (the paper generates a state machine per
// network and does not describe it), the fixed placement of A_L, blocking
// execution of commands, and a single clock for eDRAM and crossbars (a
// crossbar cycle is a request/acknowledge pair of clocks).
//
// Tool notes: rst_n is an asynchronous reset; it also appears in the
// `disable iff` of the assertions, which lint reports as a mixed sync/async
// use. Unused command fields (row, mode, g outside their commands) and the
// upper A_L valid bits (all equal to bit 0) are left unconnected on purpose.
// Status outputs: hp_xb_ops / hp_sat from the sequencer, n_cmds accepted
// commands, vmm_xb_cycles the total VMM crossbar cycles of all sub-tiles.
module repast_tile
  import repast_pkg::*;
#(
  parameter int unsigned N_SUB     = 16,
  parameter int unsigned N_VMM     = 28,
  parameter int unsigned XB        = 256,
  parameter int unsigned GMAX      = 4,
  parameter int unsigned BUF_BYTES = 524288,
  parameter int unsigned X_STEP    = 5,
  localparam int unsigned NV       = GMAX * XB,
  localparam int unsigned BAW      = $clog2(BUF_BYTES * 8 / 256),
  localparam int unsigned DACW     = RDAC + 1,
  localparam int unsigned XW       = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned VXW      = $clog2(N_VMM),
  localparam int unsigned RAW      = $clog2(XB)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host access to the buffer
  input  logic                     h_req,
  input  logic                     h_we,
  input  logic [BAW-1:0]           h_addr,
  input  logic [255:0]             h_wdata,
  output logic                     h_gnt,
  output logic                     h_rvalid,
  output logic [255:0]             h_rdata,
  // commands
  input  logic                     cmd_valid,
  input  tile_cmd_t                cmd,
  output logic                     cmd_ready,
  input  logic [XB-1:0][KR-1:0]    prog_data,
  // status
  output logic [31:0]              hp_xb_ops,
  output logic [31:0]              hp_sat,
  output logic [31:0]              n_cmds,
  output logic                     hp_busy,
  output logic [N_SUB-1:0]         sub_busy,
  output logic [31:0]              vmm_xb_cycles
);

  typedef enum logic [3:0] {
    T_IDLE, T_LD, T_ST_RD, T_ST_WR, T_VMM, T_VMM_WAIT,
    T_HP_LD, T_HP_RUN, T_HP_WAIT, T_HP_ST
  } tstate_e;

  tstate_e   ts;
  tile_cmd_t c;
  logic [15:0] k_req, k_rsp;

  // ---------------- bus and buffer ----------------
  logic [1:0]             m_req, m_we, m_gnt, m_rvalid;
  logic [1:0][BAW-1:0]    m_addr;
  logic [1:0][255:0]      m_wdata;
  logic [255:0]           m_rdata;
  logic                   s_req, s_we, s_rvalid;
  logic [BAW-1:0]         s_addr;
  logic [255:0]           s_wdata, s_rdata;

  tile_bus #(.N_M(2), .WORD_W(256), .AW(BAW)) u_bus (
    .clk, .rst_n, .m_req, .m_we, .m_addr, .m_wdata, .m_gnt, .m_rvalid, .m_rdata,
    .s_req, .s_we, .s_addr, .s_wdata, .s_rdata, .s_rvalid);

  edram_buffer #(.BYTES(BUF_BYTES), .WORD_W(256)) u_buf (
    .clk, .rst_n, .req(s_req), .we(s_we), .addr(s_addr), .wdata(s_wdata),
    .rdata(s_rdata), .rvalid(s_rvalid));

  assign m_req[0]   = h_req;
  assign m_we[0]    = h_we;
  assign m_addr[0]  = h_addr;
  assign m_wdata[0] = h_wdata;
  assign h_gnt      = m_gnt[0];
  assign h_rvalid   = m_rvalid[0];
  assign h_rdata    = m_rdata;

  // ---------------- INV crossbars ----------------
  logic                          inv_req, inv_ack;
  xop_e                          inv_op;
  logic signed [NV-1:0][DACW-1:0] inv_dac;
  logic signed [NV-1:0][RADC-1:0] inv_adc;
  logic signed [NV-1:0][31:0]     inv_vmm;
  inv_mode_e                     cfg_mode;
  logic [2:0]                    cfg_g;

  inv_fabric #(.N_XB(N_SUB), .XB(XB), .GMAX(GMAX), .KR(KR), .DACW(DACW), .RADC(RADC)) u_inv (
    .clk, .rst_n,
    .prog_en  (ts == T_IDLE && cmd_valid && cmd.op == C_PROG_INV),
    .prog_xb  (XW'(cmd.xb)),
    .prog_row (RAW'(cmd.row)),
    .prog_data,
    .cfg_mode, .cfg_g,
    .req(inv_req), .op(inv_op), .grp(XW'(c.xb)), .dac(inv_dac),
    .ack(inv_ack), .adc(inv_adc), .vmm(inv_vmm));

  // ---------------- inversion sequencer ----------------
  logic                          hp_start, hp_done;
  logic signed [NV-1:0][QB-1:0]  hp_b;
  logic signed [NV-1:0][QX-1:0]  hp_x;
  logic                          al_req, al_ack;
  logic signed [NV-1:0][DACW-1:0] al_dac;
  logic signed [NV-1:0][31:0]     al_y;

  hp_inv_ctrl #(.NV(NV), .QB(QB), .QX(QX), .QA(QA), .KR(KR), .RDAC(RDAC), .RADC(RADC),
                .X_STEP(X_STEP), .N_LOOP(N_LOOP)) u_hp (
    .clk, .rst_n, .start(hp_start), .b_in(hp_b), .busy(hp_busy), .done(hp_done), .x_out(hp_x),
    .inv_req, .inv_op, .inv_dac, .inv_ack, .inv_adc, .inv_vmm,
    .al_req, .al_dac, .al_ack, .al_y, .n_xb_ops(hp_xb_ops), .n_sat(hp_sat));

  // ---------------- sub-tiles ----------------
  logic [N_SUB-1:0]                    st_vmm_done, st_al_vld;
  logic [N_SUB-1:0][255:0]             st_or_rdata;
  logic signed [XB-1:0][31:0]          st_al_y [N_SUB];
  logic [N_SUB-1:0][31:0]              st_xb_cycles;

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    localparam int unsigned BR = s / GMAX;
    localparam int unsigned BC = s % GMAX;
    logic signed [XB-1:0][DACW-1:0] sdac;
    logic [XB-1:0][RC-1:0]          pd;
    always_comb begin
      sdac = '0;
      if (BR < GMAX) sdac = al_dac[BC*XB +: XB];
      for (int b = 0; b < XB; b++) pd[b] = prog_data[b][RC-1:0];
    end
    sub_tile #(.N_VMM(N_VMM), .XB(XB), .RC(RC), .RDAC(RDAC)) u_st (
      .clk, .rst_n,
      .prog_en   (ts == T_IDLE && cmd_valid && cmd.op == C_PROG_VMM && cmd.sub == 8'(s)),
      .prog_xb   (VXW'(cmd.xb)),
      .prog_row  (RAW'(cmd.row)),
      .prog_data (pd),
      .ir_we     (ts == T_LD && m_rvalid[1] && c.sub == 8'(s)),
      .ir_addr   (7'(c.addr_b + k_rsp)),
      .ir_wdata  (m_rdata),
      .or_addr   (5'(c.addr_a + k_req)),
      .or_rdata  (st_or_rdata[s]),
      .vmm_start (ts == T_VMM && c.sub == 8'(s)),
      .vmm_xb    (VXW'(c.xb)),
      .vmm_ir_base (7'(c.addr_a)),
      .vmm_or_base (5'(c.addr_b)),
      .vmm_shift (c.shift),
      .vmm_scale (c.scale),
      .vmm_act   (c.act),
      .vmm_busy  (sub_busy[s]),
      .vmm_done  (st_vmm_done[s]),
      .n_xb_cycles (st_xb_cycles[s]),
      .al_en     (al_req && (BR < GMAX)),
      .al_dac    (sdac),
      .al_vld    (st_al_vld[s]),
      .al_y      (st_al_y[s]));
  end

  // Add the A_L block results of each block row.
  always_comb begin
    al_y = '0;
    for (int s = 0; s < N_SUB; s++)
      if (s / GMAX < GMAX)
        for (int b = 0; b < XB; b++)
          al_y[(s / GMAX) * XB + b] = al_y[(s / GMAX) * XB + b] + st_al_y[s][b];
  end
  // All A_L sub-tiles are driven by the same request and answer together.
  assign al_ack = st_al_vld[0];

  always_comb begin
    vmm_xb_cycles = '0;
    for (int s = 0; s < N_SUB; s++) vmm_xb_cycles = vmm_xb_cycles + st_xb_cycles[s];
  end

  // ---------------- command sequencer ----------------
  localparam int unsigned VW16 = NV / 16;   // buffer words per vector

  always_comb begin
    m_req[1]   = 1'b0;
    m_we[1]    = 1'b0;
    m_addr[1]  = '0;
    m_wdata[1] = '0;
    unique case (ts)
      T_LD: begin
        m_req[1]  = (k_req < 16'(c.len));
        m_addr[1] = BAW'(c.addr_a + k_req);
      end
      T_ST_WR: begin
        m_req[1]   = 1'b1;
        m_we[1]    = 1'b1;
        m_addr[1]  = BAW'(c.addr_b + k_req);
        m_wdata[1] = st_or_rdata[c.sub[XW-1:0]];
      end
      T_HP_LD: begin
        m_req[1]  = (k_req < 16'(VW16));
        m_addr[1] = BAW'(c.addr_a + k_req);
      end
      T_HP_ST: begin
        m_req[1]   = 1'b1;
        m_we[1]    = 1'b1;
        m_addr[1]  = BAW'(c.addr_b + k_req);
        m_wdata[1] = hp_x[k_req[$clog2(VW16 > 1 ? VW16 : 2)-1:0]*16 +: 16];
      end
      default: ;
    endcase
  end

  assign cmd_ready = (ts == T_IDLE);
  assign hp_start  = (ts == T_HP_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts       <= T_IDLE;
      c        <= '0;
      k_req    <= '0;
      k_rsp    <= '0;
      cfg_mode <= INV_SINGLE;
      cfg_g    <= 3'd1;
      hp_b     <= '0;
      n_cmds   <= '0;
    end else begin
      unique case (ts)
        T_IDLE: if (cmd_valid) begin
          c      <= cmd;
          k_req  <= '0;
          k_rsp  <= '0;
          n_cmds <= n_cmds + 1;
          unique case (cmd.op)
            C_CFG_INV:  begin cfg_mode <= cmd.mode; cfg_g <= cmd.g; end
            C_LOAD_IR:  ts <= T_LD;
            C_STORE_OR: ts <= T_ST_RD;
            C_VMM:      ts <= T_VMM;
            C_HPINV:    ts <= T_HP_LD;
            default: ;
          endcase
        end
        T_LD: begin
          if (m_gnt[1]) k_req <= k_req + 1;
          if (m_rvalid[1]) begin
            k_rsp <= k_rsp + 1;
            if (k_rsp + 1 == 16'(c.len)) ts <= T_IDLE;
          end
        end
        T_ST_RD: ts <= T_ST_WR;          // OR read latency
        T_ST_WR: if (m_gnt[1]) begin
          k_req <= k_req + 1;
          ts    <= (k_req + 1 == 16'(c.len)) ? T_IDLE : T_ST_RD;
        end
        T_VMM:      ts <= T_VMM_WAIT;
        T_VMM_WAIT: if (st_vmm_done[c.sub[XW-1:0]]) ts <= T_IDLE;
        T_HP_LD: begin
          if (m_gnt[1]) k_req <= k_req + 1;
          if (m_rvalid[1]) begin
            hp_b[k_rsp * 16 +: 16] <= m_rdata;
            k_rsp <= k_rsp + 1;
            if (k_rsp + 1 == 16'(VW16)) ts <= T_HP_RUN;
          end
        end
        T_HP_RUN: begin
          k_req <= '0;
          ts    <= T_HP_WAIT;
        end
        T_HP_WAIT: if (hp_done) ts <= T_HP_ST;
        T_HP_ST: if (m_gnt[1]) begin
          k_req <= k_req + 1;
          if (k_req + 1 == 16'(VW16)) ts <= T_IDLE;
        end
        default: ts <= T_IDLE;
      endcase
    end
  end

  // The command port is only accepted while idle.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (ts != T_IDLE) |-> cmd_ready == 1'b0);

endmodule
