// tb_tile_bus: three masters with random requests share one buffer through
// the bus. Checks one grant per cycle, round-robin fairness (a waiting master
// is served within N_M grants), that read data returns to the right master
// one clock after the grant, and the final memory contents.
`timescale 1ns/1ps
module tb_tile_bus;
  localparam int unsigned M = 3, AW = 7, D = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [M-1:0] m_req, m_we, m_gnt, m_rvalid;
  logic [M-1:0][AW-1:0] m_addr;
  logic [M-1:0][255:0] m_wdata;
  logic [255:0] m_rdata, s_wdata, s_rdata;
  logic s_req, s_we, s_rvalid;
  logic [AW-1:0] s_addr;
  logic [255:0] mem [D];
  int wait_cnt [M];
  int pend_m, pend_a;
  int grants [M];
  logic [M-1:0] gm;
  tile_bus #(.N_M(M), .WORD_W(256), .AW(AW)) dut (.*);
  edram_buffer #(.BYTES(4096), .WORD_W(256)) u_buf (.clk, .rst_n, .req(s_req), .we(s_we),
    .addr(s_addr), .wdata(s_wdata), .rdata(s_rdata), .rvalid(s_rvalid));
  initial begin
    m_req = '0; m_we = '0; m_addr = '0; m_wdata = '0; pend_m = -1; pend_a = 0;
    for (int i = 0; i < M; i++) begin wait_cnt[i] = 0; grants[i] = 0; end
    for (int i = 0; i < D; i++) mem[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      m_req = 3'b001; m_we = 3'b001; m_addr[0] = AW'(i); m_wdata[0] = '0;
      @(negedge clk);
    end
    m_req = '0;
    for (int t = 0; t < 400; t++) begin
      // new requests where a master is idle; keep waiting ones unchanged
      for (int k = 0; k < M; k++)
        if (!m_req[k] && $urandom_range(0, 3) != 0) begin
          m_req[k] = 1; m_we[k] = $urandom_range(0, 1);
          m_addr[k] = AW'($urandom_range(0, D - 1));
          m_wdata[k] = {8{$urandom}};
        end
      #1;
      checks++;
      if (!$onehot(m_gnt) && m_req != '0) begin failures++; $display("FAIL grant %b", m_gnt); end
      // check read data of the grant of the previous cycle
      if (pend_m >= 0) begin
        checks++;
        if (m_rvalid != M'(1 << pend_m) || m_rdata !== mem[pend_a]) begin
          failures++; $display("FAIL read return to %0d", pend_m);
        end
      end
      pend_m = -1;
      gm = m_gnt;
      for (int k = 0; k < M; k++) begin
        if (m_gnt[k]) begin
          grants[k]++;
          wait_cnt[k] = 0;
          if (m_we[k]) mem[m_addr[k]] = m_wdata[k];
          else begin pend_m = k; pend_a = int'(m_addr[k]); end
        end else if (m_req[k]) begin
          wait_cnt[k]++;
          checks++;
          if (wait_cnt[k] >= M) begin failures++; $display("FAIL master %0d starved", k); end
        end
      end
      @(negedge clk);
      for (int k = 0; k < M; k++) if (gm[k]) m_req[k] = 0;
    end
    m_req = '0;
    for (int i = 0; i < D; i++) begin
      m_req[1] = 1; m_we[1] = 0; m_addr[1] = AW'(i);
      @(negedge clk);
      m_req[1] = 0;
      #1;
      checks++;
      if (!m_rvalid[1] || m_rdata !== mem[i]) begin failures++; $display("FAIL final word %0d", i); end
    end
    $display("grants: %0d %0d %0d", grants[0], grants[1], grants[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
