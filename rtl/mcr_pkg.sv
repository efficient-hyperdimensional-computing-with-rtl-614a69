// mcr_pkg: shared types, constants and constant functions of the MCR-HDCU
// coprocessor (an accelerator for Modular Composite Representation
// hypervectors, whose components live in the ring Z_r).
//
// Default configuration: modulus r = 16 (b = 4 bits per component),
// SIMD = 8 components per cycle, fixed-point precision FP = 16 bits and four
// 2 KB scratchpads (three holding Z_r vectors, one holding Cartesian
// accumulators). r, FP, the SPM size and count follow the configuration the
// hardware results are reported for; SIMD = 8 is the smallest of the four
// evaluated widths (8/16/32/64). The command encoding below is this design's
// own: the instruction-set encoding of the host core is not part of it.
package mcr_pkg;

  localparam int DEF_R         = 16;
  localparam int DEF_SIMD      = 8;
  localparam int DEF_FP        = 16;
  localparam int DEF_SPM_BYTES = 2048;
  localparam int DEF_N_ZR_SPM  = 3;

  // Functional-unit enable bits (synthesis-time FU enable/disable).
  localparam int FU_BIND = 0;
  localparam int FU_SUP  = 1;
  localparam int FU_NORM = 2;
  localparam int FU_PERM = 3;
  localparam int FU_DIST = 4;   // distance and search share this unit
  localparam logic [4:0] DEF_FU_EN = 5'b11111;

  // Width of line addresses and runtime registers carried by a command.
  localparam int CMD_AW = 16;

  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_CFG        = 4'd1,  // HVDIM <= rs1.line, HVCLASS <= rs2.line
    OP_BIND       = 4'd2,  // rd = rs1 + rs2 (mod r)
    OP_UNBIND     = 4'd3,  // rd = rs1 - rs2 (mod r)
    OP_SUP        = 4'd4,  // acc[rs2] = acc[rs2] + cart(rs1)
    OP_SUP_INIT   = 4'd5,  // acc[rs2] = cart(rs1)
    OP_NORM       = 4'd6,  // rd = WTA(acc[rs1])
    OP_PERM       = 4'd7,  // rd = block-cyclic shift of rs1 by rs2.line blocks
    OP_DIST       = 4'd8,  // mem[rd] = delta(rs1, rs2)
    OP_SEARCH     = 4'd9   // mem[rd] = argmin_c delta(rs1, rs2 + c*HVDIM/SIMD)
  } op_e;

  // An operand: which Z_r scratchpad and which line in it. Operands that
  // name the accumulator (OP_SUP rs2, OP_NORM rs1) always refer to the
  // superposition SPM and ignore the spm field.
  typedef struct packed {
    logic [1:0]        spm;
    logic [CMD_AW-1:0] line;
  } opnd_t;

  typedef struct packed {
    op_e   op;
    opnd_t rd;
    opnd_t rs1;
    opnd_t rs2;
  } cmd_t;

  // ---------------------------------------------------------------------
  // Fixed-point trigonometry for the cos/sin tables, integer-only so that
  // every tool can evaluate it at elaboration time.
  // Returns round(amp * cos(2*pi*k/r)) (is_sin = 0) or
  //         round(amp * sin(2*pi*k/r)) (is_sin = 1).
  // The angle is reduced to [0, pi/2) and a Taylor series is summed in
  // Q30 arithmetic; the error is far below one LSB for amp < 2^20.
  // ---------------------------------------------------------------------
  localparam longint PI_Q30 = 64'd3373259426;  // pi * 2^30

  function automatic longint taylor_q30(longint x, bit want_sin);
    longint term, sum;
    term = want_sin ? x : (64'sd1 <<< 30);
    sum  = term;
    for (int n = (want_sin ? 2 : 1); n < 24; n += 2) begin
      // term_{next} = -term * x^2 / ((2n')(2n'+1)) expressed step by step
      term = -((((term * x) >>> 30) * x) >>> 30);
      term = term / (longint'(n) * (longint'(n) + 1));
      sum  = sum + term;
    end
    return sum;
  endfunction

  function automatic int trig_q(int k, int r, int amp, bit is_sin);
    longint p, q, rem, x, v, prod;
    // phase in units of (2*pi)/(4r); sin(t) = cos(t - pi/2)
    p = (4 * longint'(k) - (is_sin ? longint'(r) : 0)) % (4 * longint'(r));
    if (p < 0) p += 4 * longint'(r);
    q   = p / longint'(r);
    rem = p % longint'(r);
    x   = (rem * (PI_Q30 / 2)) / longint'(r);     // angle inside the quadrant, Q30
    case (q)
      0: v =  taylor_q30(x, 1'b0);
      1: v = -taylor_q30(x, 1'b1);
      2: v = -taylor_q30(x, 1'b0);
      default: v = taylor_q30(x, 1'b1);
    endcase
    prod = v * amp;
    if (prod >= 0) return int'((prod + (64'sd1 <<< 29)) >>> 30);
    else           return -int'(((-prod) + (64'sd1 <<< 29)) >>> 30);
  endfunction

  // Default LUT amplitude: leaves 10 bits of headroom in an FP-bit signed
  // accumulator, so that 1024 superpositions can never overflow.
  function automatic int def_amp(int fp);
    return ((1 << (fp - 1)) - 1) >> 10;
  endfunction

endpackage
