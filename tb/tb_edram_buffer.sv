// tb_edram_buffer: random writes and reads on a 4 kB instance; every read
// must return the last written word with rvalid exactly one clock after req.
`timescale 1ns/1ps
module tb_edram_buffer;
  localparam int unsigned D = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req, we, rvalid; logic [6:0] addr; logic [255:0] wdata, rdata;
  logic [255:0] mem [D];
  edram_buffer #(.BYTES(4096), .WORD_W(256)) dut (.*);
  initial begin
    req = 0; we = 0; addr = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      mem[i] = {8{$urandom}};
      req = 1; we = 1; addr = 7'(i); wdata = mem[i];
      @(negedge clk);
      checks++;
      if (rvalid) begin failures++; $display("FAIL rvalid after a write"); end
    end
    for (int t = 0; t < 300; t++) begin
      int i;
      i = int'($urandom_range(0, D - 1));
      req = 1; addr = 7'(i);
      we = ($urandom_range(0, 2) == 0);
      if (we) begin
        mem[i] = {8{$urandom}};
        wdata = mem[i];
        @(negedge clk);
      end else begin
        @(negedge clk);
        req = 0;
        checks++;
        if (!rvalid || rdata !== mem[i]) begin failures++; $display("FAIL read %0d", i); end
        @(negedge clk);
        checks++;
        if (rvalid) begin failures++; $display("FAIL rvalid held"); end
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
