// tile_bus: the shared 256-bit bus of a tile.
//
// N_M masters (the tile's external port and the sub-tiles' IR/OR movers)
// request the eDRAM buffer; one master per clock is granted, in round-robin
// order starting after the last granted master, and its request is passed
// to the buffer in the same cycle. Read data returns to all masters with a
// one-hot `m_rvalid` naming the master whose read it answers, one clock after
// the grant (the buffer's latency). The paper gives the bus and its width;
// the arbitration is this design's choice.
module tile_bus #(
  parameter int unsigned N_M    = 3,
  parameter int unsigned WORD_W = 256,
  parameter int unsigned AW     = 14
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // masters
  input  logic [N_M-1:0]              m_req,
  input  logic [N_M-1:0]              m_we,
  input  logic [N_M-1:0][AW-1:0]      m_addr,
  input  logic [N_M-1:0][WORD_W-1:0]  m_wdata,
  output logic [N_M-1:0]              m_gnt,
  output logic [N_M-1:0]              m_rvalid,
  output logic [WORD_W-1:0]           m_rdata,
  // buffer
  output logic                        s_req,
  output logic                        s_we,
  output logic [AW-1:0]               s_addr,
  output logic [WORD_W-1:0]           s_wdata,
  input  logic [WORD_W-1:0]           s_rdata,
  input  logic                        s_rvalid
);

  localparam int unsigned IW = (N_M > 1) ? $clog2(N_M) : 1;

  logic [IW-1:0] last_q;
  logic [IW-1:0] sel;
  logic          any;
  logic [N_M-1:0] rd_owner_q;

  always_comb begin
    sel = last_q;
    any = 1'b0;
    for (int k = 1; k <= N_M; k++) begin
      int unsigned idx;
      idx = (int'(last_q) + k) % N_M;
      if (!any && m_req[idx]) begin
        sel = IW'(idx);
        any = 1'b1;
      end
    end
    m_gnt = '0;
    if (any) m_gnt[sel] = 1'b1;
    s_req   = any;
    s_we    = m_we[sel];
    s_addr  = m_addr[sel];
    s_wdata = m_wdata[sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q     <= IW'(N_M - 1);
      rd_owner_q <= '0;
    end else begin
      if (any) last_q <= sel;
      rd_owner_q <= (any && !m_we[sel]) ? m_gnt : '0;
    end
  end

  assign m_rdata  = s_rdata;
  assign m_rvalid = s_rvalid ? rd_owner_q : '0;

  // At most one master is granted per cycle.
  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m_gnt));

endmodule
