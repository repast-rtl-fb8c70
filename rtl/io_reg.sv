// io_reg: sub-tile input register (IR) or output register (OR).
//
// A small single-port register file between the tile bus and the crossbars:
// IR holds input vectors before they are sliced onto the DACs, OR collects
// results before they go back to the buffer. The paper gives the sizes
// (IR 4 kB, OR 1 kB); one word is one 256-bit bus beat, which is this design's
// choice. Writes take effect at the clock edge; reads return the addressed
// word one clock later (synchronous read).
module io_reg #(
  parameter int unsigned BYTES  = 4096,
  parameter int unsigned WORD_W = 256,
  localparam int unsigned DEPTH = BYTES * 8 / WORD_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [WORD_W-1:0] wdata,
  output logic [WORD_W-1:0] rdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
