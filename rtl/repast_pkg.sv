// repast_pkg: constants and types shared by the RePAST tile.
//
// The numbers are the main configuration of the design: 256x256 ReRAM
// crossbars of 4-bit cells, 4-bit DACs and 8-bit ADCs, 16-bit operands, a
// 16-bit SOI matrix split into an 8-bit high part (held on the INV crossbars)
// and an 8-bit low part (held on VMM crossbars), 18 Taylor loops, 16 INV
// crossbars and 16 sub-tiles of 28 VMM crossbars per tile, a 512 kB buffer and
// a 256-bit bus. The sign-magnitude DAC code and the command encodings are
// this design's own choices.
package repast_pkg;

  // Crossbar and converter resolution.
  localparam int unsigned XB      = 256;  // crossbar rows = columns
  localparam int unsigned RC      = 4;    // bits per ReRAM cell
  localparam int unsigned RDAC    = 4;    // DAC resolution (magnitude bits)
  localparam int unsigned RADC    = 8;    // ADC resolution
  localparam int unsigned DAC_W   = RDAC + 1;  // sign + magnitude

  // Operand precision.
  localparam int unsigned QA      = 16;
  localparam int unsigned QB      = 16;
  localparam int unsigned QX      = 16;
  localparam int unsigned KR      = 8;    // bits of A kept on the INV crossbars (A_H)
  localparam int unsigned N_LOOP  = 18;   // Taylor (Loop A) iterations

  // Tile organisation.
  localparam int unsigned N_SUB   = 16;
  localparam int unsigned N_VMM   = 28;
  localparam int unsigned BUS_W   = 256;

  // Configuration of the INV crossbar wires and switches.
  typedef enum logic [1:0] {
    INV_SINGLE = 2'd0,   // every crossbar is its own 256x256 inversion
    INV_GRID   = 2'd1,   // g x g crossbars form one (g*256)x(g*256) inversion
    INV_FUSED  = 2'd2    // g + g crossbars compute (A1*A2)^-1, A1: g*256 x 256
  } inv_mode_e;

  // Operation requested from the INV crossbars.
  typedef enum logic {
    XOP_INV = 1'b0,      // x = A_H^-1 * d, quantized by the ADC
    XOP_VMM = 1'b1       // y = A_H * d (bitline sums)
  } xop_e;

  // Shift-and-add unit operations.
  typedef enum logic [1:0] {
    SA_CLEAR = 2'd0,     // acc = 0
    SA_SHADD = 2'd1,     // acc = (acc << shift) + in
    SA_ADD   = 2'd2,     // acc = acc + (in << shift)
    SA_SUB   = 2'd3      // acc = acc - (in << shift)
  } sa_op_e;

  // Activation function selection.
  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_LRELU = 2'd2     // negative inputs scaled by 1/8
  } act_e;

  // Tile commands.
  typedef enum logic [2:0] {
    C_PROG_VMM = 3'd0,   // write one wordline of a VMM crossbar (prog_data[.][RC-1:0])
    C_PROG_INV = 3'd1,   // write one wordline of an INV crossbar (prog_data)
    C_CFG_INV  = 3'd2,   // set the INV wires and switches (mode, g)
    C_LOAD_IR  = 3'd3,   // copy len words buffer[addr_a..] -> IR[addr_b..] of sub
    C_STORE_OR = 3'd4,   // copy len words OR[addr_a..] of sub -> buffer[addr_b..]
    C_VMM      = 3'd5,   // local VMM in sub: IR[addr_a] -> crossbars xb.. -> OR[addr_b]
    C_HPINV    = 3'd6    // high-precision solve on INV group xb: b at buffer[addr_a],
                         // x to buffer[addr_b]
  } tcmd_e;

  typedef struct packed {
    tcmd_e              op;
    logic [7:0]         sub;
    logic [7:0]         xb;
    logic [9:0]         row;
    logic [15:0]        addr_a;
    logic [15:0]        addr_b;
    logic [7:0]         len;
    logic [5:0]         shift;
    logic signed [15:0] scale;
    act_e               act;
    inv_mode_e          mode;
    logic [2:0]         g;
  } tile_cmd_t;

  // Round-half-up arithmetic right shift of a signed value.
  function automatic longint rshr(input longint v, input int unsigned s);
    if (s == 0) return v;
    return (v + (longint'(1) <<< (s - 1))) >>> s;
  endfunction

  // Clamp a signed value into w bits (two's complement).
  function automatic longint sat(input longint v, input int unsigned w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Slice i (0 = most significant) of n sign-magnitude DAC slices of v.
  function automatic logic signed [DAC_W-1:0] dac_slice(input longint v,
                                                        input int unsigned i,
                                                        input int unsigned n);
    longint m;
    longint s;
    m = (v < 0) ? -v : v;
    s = (m >> (RDAC * (n - 1 - i))) & ((longint'(1) << RDAC) - 1);
    if (v < 0) s = -s;
    return DAC_W'(s);
  endfunction

endpackage
