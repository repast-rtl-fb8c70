// inv_fabric: behavioural model of a tile's INV crossbars together with
// their voltage followers (VFs), operational amplifiers (OpAmps), switches
// (SWs), DACs and ADCs.
//
// This is a behavioural model of analog circuitry, not synthesizable logic
// in intent. Each of the N_XB crossbars holds an XB x XB matrix of KR-bit
// codes, the high part A_H of a 16-bit matrix, value code / 2^KR. In
// hardware a code is spread over KR/4 arrays of 4-bit cells whose VFs have
// gains 1, 2^-4, ...; the model keeps the code. The OpAmps feed the bitline
// currents back onto the wordlines, so the wordline voltages settle at the
// solution of A_H x = d for the voltages d applied through the DACs. The
// model computes that solution with real arithmetic (Gauss-Jordan
// elimination, cached until the cells or the configuration change) and
// quantizes it like the ADC: adc = sat(round(x * 2^ADC_FRAC), RADC).
// The same crossbars also act as a plain VMM array (op = XOP_VMM):
// vmm = round(2^KR * A_H * d), the bitline sums in units of the code.
//
// The wires and switches join crossbars in one of three configurations:
//   INV_SINGLE  group k is crossbar k alone (XB x XB);
//   INV_GRID    group k is g x g crossbars k*g*g + r*g + c holding block
//               (r, c) of one (g*XB)-square matrix, as when the VFs of a
//               crossbar take the left neighbour's wordlines and the SWs
//               short bitlines of a column onto one OpAmp group;
//   INV_FUSED   group k is 2g crossbars from k*2g: the first g hold the
//               row blocks of A1 (g*XB x XB), the next g the column blocks
//               of A2 (XB x g*XB); the loop A1 -> A2 -> OpAmps computes
//               x = (A1*A2)^-1 d, and the VMM mode returns A1*(A2*d).
// Vector lane j belongs to crossbar column block j / XB of the group.
// A request (`req`) is answered one clock later (`ack`), one crossbar cycle:
// the paper states the circuit settles within the 100 ns cycle.
//
// Follows the paper: the feedback inversion circuit, the VF gain stacking of
// cells slices, 16 crossbars per tile, 2x2 and fused configurations. This
// design's choices: only the three regular configurations (no arbitrary
// per-crossbar switch settings), ideal OpAmps, the ADC full scale
// (ADC_FRAC fractional bits), the VMM mode's ideal ADC.
// Because the settling of the feedback loop is modelled with `real`
// arithmetic, logic synthesis does not accept this model; lint and
// elaboration do. A netlist would replace it with the analog macro.
module inv_fabric
  import repast_pkg::*;
#(
  parameter int unsigned N_XB     = 16,
  parameter int unsigned XB       = 256,
  parameter int unsigned GMAX     = 4,
  parameter int unsigned KR       = 8,
  parameter int unsigned DACW     = 5,
  parameter int unsigned RADC     = 8,
  parameter int unsigned ADC_FRAC = 2,
  parameter int unsigned VW       = 32,
  localparam int unsigned NL      = GMAX * XB,
  localparam int unsigned XW      = (N_XB > 1) ? $clog2(N_XB) : 1,
  localparam int unsigned RAW     = $clog2(XB)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // programming one wordline of one crossbar
  input  logic                              prog_en,
  input  logic [XW-1:0]                     prog_xb,
  input  logic [RAW-1:0]                    prog_row,
  input  logic [XB-1:0][KR-1:0]             prog_data,
  // switch configuration
  input  inv_mode_e                         cfg_mode,
  input  logic [2:0]                        cfg_g,
  // computing
  input  logic                              req,
  input  xop_e                              op,
  input  logic [XW-1:0]                     grp,
  input  logic signed [NL-1:0][DACW-1:0]    dac,
  output logic                              ack,
  output logic signed [NL-1:0][RADC-1:0]    adc,
  output logic signed [NL-1:0][VW-1:0]      vmm
);

  logic [KR-1:0] cells [N_XB][XB][XB];

  real m    [NL][NL];   // group matrix, in units of the code (value * 2^KR)
  real minv [NL][NL];   // inverse of the group matrix value
  logic             dirty;
  inv_mode_e        c_mode;
  logic [2:0]       c_g;
  logic [XW-1:0]    c_grp;
  int unsigned      dim;

  function automatic int unsigned gsize(input inv_mode_e md, input logic [2:0] g);
    if (md == INV_SINGLE || g == 0) return 1;
    return int'(g);
  endfunction

  // Code of element (i, j) of crossbar x.
  function automatic real code(input int unsigned x, input int unsigned i, input int unsigned j);
    return real'(cells[x][i][j]);
  endfunction

  // Build the group matrix of the current configuration into m.
  task automatic build(input inv_mode_e md, input int unsigned g, input int unsigned k);
    int unsigned n;
    n = g * XB;
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned j = 0; j < n; j++) begin
        if (md == INV_FUSED) begin
          // row i of A1 from crossbar k*2g + i/XB, column j of A2 from
          // crossbar k*2g + g + j/XB; both share the inner dimension XB.
          real s;
          s = 0.0;
          for (int unsigned t = 0; t < XB; t++)
            s += code(k*2*g + i/XB, i%XB, t) * code(k*2*g + g + j/XB, t, j%XB);
          m[i][j] = s / real'(1 << KR);
        end else begin
          m[i][j] = code(k*g*g + (i/XB)*g + j/XB, i%XB, j%XB);
        end
      end
    dim = n;
  endtask

  // Gauss-Jordan inversion of m / 2^KR into minv (partial pivoting).
  task automatic invert();
    int unsigned n;
    n = dim;
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned j = 0; j < n; j++) begin
        minv[i][j] = (i == j) ? 1.0 : 0.0;
      end
    // m is overwritten with its reduced form; build() restores it.
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned j = 0; j < n; j++)
        m[i][j] = m[i][j] / real'(1 << KR);
    for (int unsigned c = 0; c < n; c++) begin
      int unsigned p;
      real best, f, t;
      p = c;
      best = (m[c][c] < 0.0) ? -m[c][c] : m[c][c];
      for (int unsigned r = c + 1; r < n; r++) begin
        t = (m[r][c] < 0.0) ? -m[r][c] : m[r][c];
        if (t > best) begin best = t; p = r; end
      end
      if (p != c)
        for (int unsigned j = 0; j < n; j++) begin
          t = m[c][j];    m[c][j] = m[p][j];       m[p][j] = t;
          t = minv[c][j]; minv[c][j] = minv[p][j]; minv[p][j] = t;
        end
      f = (m[c][c] == 0.0) ? 0.0 : 1.0 / m[c][c];
      for (int unsigned j = 0; j < n; j++) begin
        m[c][j]    = m[c][j] * f;
        minv[c][j] = minv[c][j] * f;
      end
      for (int unsigned r = 0; r < n; r++)
        if (r != c && m[r][c] != 0.0) begin
          f = m[r][c];
          for (int unsigned j = 0; j < n; j++) begin
            m[r][j]    = m[r][j] - f * m[c][j];
            minv[r][j] = minv[r][j] - f * minv[c][j];
          end
        end
    end
  endtask

  function automatic longint rnd(input real v);
    return longint'($floor(v + 0.5));
  endfunction

  always_ff @(posedge clk) begin
    if (prog_en)
      for (int c = 0; c < XB; c++) cells[prog_xb][prog_row][c] <= prog_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack    <= 1'b0;
      adc    <= '0;
      vmm    <= '0;
      dirty  <= 1'b1;
      c_mode <= INV_SINGLE;
      c_g    <= 3'd1;
      c_grp  <= '0;
    end else begin
      ack <= req;
      if (prog_en) dirty <= 1'b1;
      if (req) begin
        int unsigned g;
        g = gsize(cfg_mode, cfg_g);
        if (dirty || c_mode != cfg_mode || c_g != cfg_g || c_grp != grp) begin
          build(cfg_mode, g, int'(grp));
          invert();
          build(cfg_mode, g, int'(grp));
          dirty  <= 1'b0;
          c_mode <= cfg_mode;
          c_g    <= cfg_g;
          c_grp  <= grp;
        end
        for (int unsigned i = 0; i < NL; i++) begin
          real sx, sv;
          sx = 0.0;
          sv = 0.0;
          if (i < g * XB) begin
            for (int unsigned j = 0; j < g * XB; j++) begin
              if (dac[j] != '0) begin
                if (op == XOP_INV) sx += minv[i][j] * real'($signed(dac[j]));
                else               sv += m[i][j] * real'($signed(dac[j]));
              end
            end
          end
          adc[i] <= RADC'(sat(rnd(sx * real'(1 << ADC_FRAC)), RADC));
          vmm[i] <= VW'(rnd(sv));
        end
      end
    end
  end

endmodule
