// act_unit: element-wise activation function of a sub-tile.
//
// Applies the selected activation to every lane of a signed vector and
// registers the result (one clock of latency, `vld_o` follows `vld_i`).
// The paper names the unit but not its functions; ReLU and a leaky ReLU with
// slope 1/8 (arithmetic shift by 3) are this design's choices, ACT_NONE passes
// the vector unchanged for layers without activation.
module act_unit
  import repast_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned W     = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  act_e                        mode,
  input  logic                        vld_i,
  input  logic signed [LANES-1:0][W-1:0] din,
  output logic                        vld_o,
  output logic signed [LANES-1:0][W-1:0] dout
);

  logic signed [LANES-1:0][W-1:0] f;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      unique case (mode)
        ACT_RELU:  f[i] = din[i][W-1] ? '0 : din[i];
        ACT_LRELU: f[i] = din[i][W-1] ? W'($signed(din[i]) >>> 3) : din[i];
        default:   f[i] = din[i];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      dout  <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) dout <= f;
    end
  end

endmodule
