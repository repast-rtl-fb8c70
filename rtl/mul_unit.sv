// mul_unit: element-wise multiplier of a sub-tile.
//
// Multiplies two signed fixed-point vectors lane by lane, as used for the
// scale of batch normalization: p = sat((a * b + 2^(FRAC-1)) >>> FRAC).
// `b` is in Q(W-FRAC).FRAC format, `a` and `p` share one format. One clock
// of latency, `vld_o` follows `vld_i`. The paper gives the unit's purpose;
// the fixed-point format, rounding and saturation are this design's choices.
module mul_unit
  import repast_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned W     = 16,
  parameter int unsigned FRAC  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        vld_i,
  input  logic signed [LANES-1:0][W-1:0] a,
  input  logic signed [LANES-1:0][W-1:0] b,
  output logic                        vld_o,
  output logic signed [LANES-1:0][W-1:0] p
);

  localparam longint PMAX = (longint'(1) <<< (W - 1)) - 1;
  localparam longint PMIN = -(longint'(1) <<< (W - 1));

  logic signed [LANES-1:0][W-1:0] r;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [2*W-1:0] prod;
      logic signed [2*W-1:0] sh;
      prod = $signed(a[i]) * $signed(b[i]);
      sh   = (prod + (2*W)'(longint'(1) <<< (FRAC - 1))) >>> FRAC;
      if (sh > (2*W)'(PMAX))      r[i] = W'(PMAX);
      else if (sh < (2*W)'(PMIN)) r[i] = W'(PMIN);
      else                        r[i] = sh[W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      p     <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) p <= r;
    end
  end

endmodule
