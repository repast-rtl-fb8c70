// vmm_xbar: behavioural model of one ReRAM VMM crossbar with its DACs,
// sample-and-hold circuits and ADCs.
//
// This is a behavioural model of an analog macro, not synthesizable logic
// in intent. The crossbar stores ROWS x COLS cells of RC bits each (a
// conductance level). A compute request applies one DAC code per wordline
// and, by Kirchhoff's current law, each bitline carries the sum of
// cells * input over its rows; the model returns those sums exactly, one
// per bitline, on `bl` with `bl_vld` one clock after `compute` (one crossbar
// cycle). The DAC code is sign + RDAC-bit magnitude, so a negative input is
// a negative wordline voltage. Cells are programmed one wordline (row) per
// clock through `prog_*`.
//
// Follows the paper: 256x256 crossbar, 4-bit cells, 4-bit DACs, current
// summation on bitlines, bit-slicing of inputs and weights done outside by
// S+A. This design's choice: an ideal ADC (the exact bitline sum is
// returned), since the paper does not say how an 8-bit ADC covers the full
// bitline range; signed DAC codes.
module vmm_xbar
  import repast_pkg::*;
#(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 256,
  parameter int unsigned CELL  = 4,
  parameter int unsigned DACW  = 5,
  parameter int unsigned OUT_W = 24,
  localparam int unsigned RAW  = $clog2(ROWS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // programming: write one wordline of cells
  input  logic                               prog_en,
  input  logic [RAW-1:0]                     prog_row,
  input  logic [COLS-1:0][CELL-1:0]          prog_data,
  // computing
  input  logic                               compute,
  input  logic signed [ROWS-1:0][DACW-1:0]   dac,
  output logic signed [COLS-1:0][OUT_W-1:0]  bl,
  output logic                               bl_vld
);

  logic [CELL-1:0] cells [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < COLS; c++) cells[prog_row][c] <= prog_data[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bl     <= '0;
      bl_vld <= 1'b0;
    end else begin
      bl_vld <= compute;
      if (compute) begin
        for (int c = 0; c < COLS; c++) begin
          logic signed [OUT_W-1:0] s;
          s = '0;
          for (int r = 0; r < ROWS; r++) begin
            if (dac[r] != '0)
              s = s + OUT_W'($signed({1'b0, cells[r][c]}) * $signed(dac[r]));
          end
          bl[c] <= s;
        end
      end
    end
  end

endmodule
