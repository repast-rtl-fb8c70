// shift_add: element-wise shift-and-add (S+A) accumulator.
//
// Bit-sliced crossbar computing produces one partial vector per input slice,
// per cell slice and per refinement step; the S+A unit folds them into one
// wide result. Each lane holds a signed accumulator. Per cycle with `en`
// set, the lane performs `op`:
//   SA_CLEAR  acc = 0
//   SA_SHADD  acc = (acc << shift) + din      (most significant slice first)
//   SA_ADD    acc = acc + (din << shift)
//   SA_SUB    acc = acc - (din << shift)      (negative Taylor terms)
// The result is visible on `acc` one clock after the operation. Following
// the paper, one S+A serves each crossbar's bitlines; the MSB-first form of the
// shift and the widths are this design's choices.
module shift_add
  import repast_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned IN_W  = 24,
  parameter int unsigned ACC_W = 40
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  sa_op_e                         op,
  input  logic [5:0]                     shift,
  input  logic signed [LANES-1:0][IN_W-1:0]  din,
  output logic signed [LANES-1:0][ACC_W-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (en) begin
      for (int i = 0; i < LANES; i++) begin
        unique case (op)
          SA_CLEAR: acc[i] <= '0;
          SA_SHADD: acc[i] <= (acc[i] <<< shift) + ACC_W'(signed'(din[i]));
          SA_ADD:   acc[i] <= acc[i] + (ACC_W'(signed'(din[i])) <<< shift);
          SA_SUB:   acc[i] <= acc[i] - (ACC_W'(signed'(din[i])) <<< shift);
        endcase
      end
    end
  end

endmodule
