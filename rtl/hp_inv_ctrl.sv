// hp_inv_ctrl: high-precision matrix inversion on low-precision crossbars.
//
// Solves A x = b to QX bits although the INV crossbars hold only the top KR
// bits of A, the DACs take RDAC bits and the ADCs give RADC bits. The matrix
// is split as A = A_H + A_L * 2^-KR: A_H (codes H, value H / 2^KR) sits on the
// INV crossbars, A_L (codes L, value L / 2^(QA-KR)) on VMM crossbars. Three
// nested loops run:
//
//   Loop A (l < N_LOOP)   Taylor series A^-1 = A_H^-1 (I - P + P^2 - ...),
//                         P = A_H^-1 A_L 2^-KR:
//                         x += (-1)^l xa_l ; b_(l+1) = A_L 2^-KR xa_l
//   Loop x (j < NX)       refine the output beyond the ADC resolution:
//                         x_j = top bits of A_H^-1 b_lj ;
//                         b_l(j+1) = (b_lj - A_H x_j 2^(X_STEP(NX-1))) 2^X_STEP
//                         xa_l = sum_j x_j 2^(X_STEP(NX-1-j))
//   Loop b (i < NB)       split b_lj into NB sign-magnitude DAC slices, invert
//                         each, shift-and-add the ADC codes (MSB first).
//
// Every crossbar operation is one request / acknowledge transaction, i.e. one
// crossbar cycle: NB inversions and NB A_H-VMM slices per Loop x iteration and
// NXD = QX/RDAC A_L-VMM slices per Loop A iteration, so one solve takes
// N_LOOP * (2*NB*NX + NXD) crossbar cycles (counted on `n_xb_ops`).
// Interfaces: `inv_*` drives the INV crossbars (XOP_INV: ADC codes back,
// XOP_VMM: bitline sums back in units of 2^-KR); `al_*` drives the VMM
// crossbars holding L (bitline sums of L * d back). `start` with `b_in`
// begins a solve; `done` pulses with `x_out` valid.
//
// Follows the paper: the three loops and their order, slicing b by the DAC,
// the residual computed on the INV crossbars in VMM mode, the A_L product on
// VMM crossbars with the 2^-KR shift, the alternating sign of the Taylor
// terms, 18 Taylor loops, the cycle count of its Eqn. for c_INV. This
// design's choices: the number of bits resolved per Loop x iteration,
// X_STEP, is 5 rather than the paper's R_ADC = 8, because with an 8-bit ADC
// behind 4-bit DAC slices each x_j is good to about 6 bits and a 2^8 residual
// gain overflows the 16-bit b (X_STEP = 8 gives the paper's schedule); the
// ADC full scale (ADC_FRAC), round-half-up shifts, saturation of the
// residual to QB bits (counted on `n_sat`).
module hp_inv_ctrl
  import repast_pkg::*;
#(
  parameter int unsigned NV       = 1024,
  parameter int unsigned QB       = 16,
  parameter int unsigned QX       = 16,
  parameter int unsigned QA       = 16,
  parameter int unsigned KR       = 8,
  parameter int unsigned RDAC     = 4,
  parameter int unsigned RADC     = 8,
  parameter int unsigned ADC_FRAC = 2,
  parameter int unsigned X_STEP   = 5,
  parameter int unsigned N_LOOP   = 18,
  parameter int unsigned VW       = 32,
  localparam int unsigned DACW    = RDAC + 1,
  localparam int unsigned NB      = (QB + RDAC - 1) / RDAC,
  localparam int unsigned NX      = (QX - 1 + X_STEP - 1) / X_STEP,
  localparam int unsigned NXD     = (QX + RDAC - 1) / RDAC,
  localparam int unsigned AW      = 48
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic signed [NV-1:0][QB-1:0]      b_in,
  output logic                              busy,
  output logic                              done,
  output logic signed [NV-1:0][QX-1:0]      x_out,
  // INV crossbars
  output logic                              inv_req,
  output xop_e                              inv_op,
  output logic signed [NV-1:0][DACW-1:0]    inv_dac,
  input  logic                              inv_ack,
  input  logic signed [NV-1:0][RADC-1:0]    inv_adc,
  input  logic signed [NV-1:0][VW-1:0]      inv_vmm,
  // VMM crossbars holding A_L
  output logic                              al_req,
  output logic signed [NV-1:0][DACW-1:0]    al_dac,
  input  logic                              al_ack,
  input  logic signed [NV-1:0][VW-1:0]      al_y,
  // statistics
  output logic [31:0]                       n_xb_ops,
  output logic [31:0]                       n_sat
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOOPB, S_RESID, S_UPDX, S_LOOPAL, S_UPDA, S_DONE
  } state_e;

  state_e state;
  logic [7:0]  l_cnt;
  logic [3:0]  j_cnt;
  logic [3:0]  i_cnt;
  logic        waiting;   // request issued, acknowledge pending

  typedef logic signed [QB-1:0] b_t;
  typedef logic signed [AW-1:0] w_t;

  b_t b_lj [NV];   // Loop x input b_lj
  w_t acc  [NV];   // S+A accumulator of the current loop
  w_t xj   [NV];   // x_mid_x[j]
  w_t xa   [NV];   // x_mid_A[l]
  w_t xacc [NV];   // result accumulator

  // Slice the operand of the current crossbar cycle onto the DACs.
  always_comb begin
    inv_dac = '0;
    al_dac  = '0;
    for (int k = 0; k < NV; k++) begin
      if (state == S_LOOPB)
        inv_dac[k] = dac_slice(longint'(b_lj[k]), int'(i_cnt), NB);
      else
        inv_dac[k] = dac_slice(longint'(xj[k]), int'(i_cnt), NB);
      al_dac[k] = dac_slice(sat(longint'(xa[k]), QX + 1), int'(i_cnt), NXD);
    end
  end

  assign inv_req = (state == S_LOOPB || state == S_RESID) && !waiting;
  assign inv_op  = (state == S_RESID) ? XOP_VMM : XOP_INV;
  assign al_req  = (state == S_LOOPAL) && !waiting;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      l_cnt    <= '0;
      j_cnt    <= '0;
      i_cnt    <= '0;
      waiting  <= 1'b0;
      b_lj     <= '{default: '0};
      acc      <= '{default: '0};
      xj       <= '{default: '0};
      xa       <= '{default: '0};
      xacc     <= '{default: '0};
      x_out    <= '0;
      done     <= 1'b0;
      n_xb_ops <= '0;
      n_sat    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < NV; k++) b_lj[k] <= $signed(b_in[k]);
          xacc     <= '{default: '0};
          xa       <= '{default: '0};
          acc      <= '{default: '0};
          l_cnt    <= '0;
          j_cnt    <= '0;
          i_cnt    <= '0;
          n_xb_ops <= '0;
          n_sat    <= '0;
          state    <= S_LOOPB;
        end
        // Loop b: one inversion per DAC slice of b_lj.
        S_LOOPB: begin
          if (inv_req) begin
            waiting <= 1'b1;
          end else if (inv_ack) begin
            waiting  <= 1'b0;
            n_xb_ops <= n_xb_ops + 1;
            for (int k = 0; k < NV; k++)
              acc[k] <= (acc[k] <<< RDAC) + AW'($signed(inv_adc[k]));
            if (i_cnt == 4'(NB - 1)) begin
              i_cnt <= '0;
              state <= S_UPDX;
            end else begin
              i_cnt <= i_cnt + 1;
            end
          end
        end
        // x_j = shift_and_add(x_mid_b), rounded to this iteration's bits.
        S_UPDX: begin
          for (int k = 0; k < NV; k++)
            xj[k] <= AW'(rshr(longint'(acc[k]), ADC_FRAC + X_STEP * (NX - 1)));
          acc   <= '{default: '0};
          state <= S_RESID;
        end
        // Residual: A_H * x_j on the INV crossbars in VMM mode.
        S_RESID: begin
          if (inv_req) begin
            waiting <= 1'b1;
          end else if (inv_ack) begin
            waiting  <= 1'b0;
            n_xb_ops <= n_xb_ops + 1;
            if (i_cnt == 4'(NB - 1)) begin
              int unsigned ns;
              ns = 0;
              i_cnt <= '0;
              for (int k = 0; k < NV; k++) begin
                longint ah, t, nb;
                ah = (longint'(acc[k]) <<< RDAC) + longint'($signed(inv_vmm[k]));
                t  = (longint'(b_lj[k]) <<< KR) - (ah <<< (X_STEP * (NX - 1)));
                nb = rshr(t <<< X_STEP, KR);
                if (nb != sat(nb, QB)) ns++;
                b_lj[k] <= QB'(sat(nb, QB));
                xa[k]   <= (xa[k] <<< X_STEP) + xj[k];
              end
              n_sat <= n_sat + ns;
              acc   <= '{default: '0};
              if (j_cnt == 4'(NX - 1)) begin
                j_cnt <= '0;
                state <= S_LOOPAL;
              end else begin
                j_cnt <= j_cnt + 1;
                state <= S_LOOPB;
              end
            end else begin
              i_cnt <= i_cnt + 1;
              for (int k = 0; k < NV; k++)
                acc[k] <= (acc[k] <<< RDAC) + AW'($signed(inv_vmm[k]));
            end
          end
        end
        // b_(l+1) = A_L * x_mid_A[l] on the VMM crossbars.
        S_LOOPAL: begin
          if (al_req) begin
            waiting <= 1'b1;
          end else if (al_ack) begin
            waiting  <= 1'b0;
            n_xb_ops <= n_xb_ops + 1;
            for (int k = 0; k < NV; k++)
              acc[k] <= (acc[k] <<< RDAC) + AW'($signed(al_y[k]));
            if (i_cnt == 4'(NXD - 1)) begin
              i_cnt <= '0;
              state <= S_UPDA;
            end else begin
              i_cnt <= i_cnt + 1;
            end
          end
        end
        // Taylor term: alternate sign, next right-hand side.
        S_UPDA: begin
          for (int k = 0; k < NV; k++) begin
            longint nb;
            nb = sat(rshr(longint'(acc[k]), QA), QB);
            b_lj[k] <= QB'(nb);
            if (l_cnt[0]) xacc[k] <= xacc[k] - xa[k];
            else          xacc[k] <= xacc[k] + xa[k];
          end
          xa  <= '{default: '0};
          acc <= '{default: '0};
          if (l_cnt == 8'(N_LOOP - 1)) begin
            state <= S_DONE;
          end else begin
            l_cnt <= l_cnt + 1;
            state <= S_LOOPB;
          end
        end
        S_DONE: begin
          for (int k = 0; k < NV; k++)
            x_out[k] <= QX'(sat(longint'(xacc[k]), QX));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request is never dropped while waiting for its acknowledge.
  a_no_ack_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                  (state == S_IDLE) |-> !inv_ack && !al_ack);

endmodule
