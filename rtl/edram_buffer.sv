// edram_buffer: the tile's 512 kB buffer.
//
// Holds feature maps, gradients and intermediate vectors of a tile between
// sub-tile operations. It is organised as 256-bit words, one per bus beat,
// and written here as a synchronous array: a request with `we` writes
// `wdata`; a request without `we` returns the word on `rdata` with `rvalid`
// one clock later. The size and the bus width follow the paper; the eDRAM
// cell, its refresh and its faster clock are not modelled.
module edram_buffer #(
  parameter int unsigned BYTES  = 524288,
  parameter int unsigned WORD_W = 256,
  localparam int unsigned DEPTH = BYTES * 8 / WORD_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [WORD_W-1:0] wdata,
  output logic [WORD_W-1:0] rdata,
  output logic              rvalid
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req && we) mem[addr] <= wdata;
    if (req && !we) rdata <= mem[addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= req && !we;
  end

endmodule
