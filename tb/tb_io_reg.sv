// tb_io_reg: fills a 4 kB register with random words, reads all back in a
// shuffled order and checks the one-clock synchronous read.
`timescale 1ns/1ps
module tb_io_reg;
  localparam int unsigned D = 128;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [6:0] addr; logic [255:0] wdata, rdata;
  logic [255:0] mem [D];
  io_reg #(.BYTES(4096), .WORD_W(256)) dut (.*);
  initial begin
    we = 0; addr = '0; wdata = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      mem[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      we = 1; addr = 7'(i); wdata = mem[i];
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < D; k++) begin
      int i;
      i = (k * 37 + 11) % D;
      addr = 7'(i);
      @(negedge clk);
      checks++;
      if (rdata !== mem[i]) begin failures++; $display("FAIL word %0d", i); end
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
