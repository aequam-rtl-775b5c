// aequam_pkg: number format, gate opcodes and micro-operation types shared
// by the state-vector emulator.
//
// Probability amplitudes are 20-bit two's-complement fixed-point numbers
// with 2 integer bits and 18 fractional bits (LSB weight 2^-18), as the
// emulator's chosen format. Products are reduced back to 20 bits by
// rounding to nearest (add half an LSB, then shift), the rounding mode the
// design selects over truncation and nearest-even.
//
// The opcode values are the gate/opcode table of the design (12 gates,
// 4-bit opcode, MSB set for the rotational gates). Opcodes 1100..1111 are
// unused; this implementation executes them as an identity (no write).
//
// The micro-operation word (uop_t) is this implementation's own encoding of
// one datapath step: operand selects for the two multipliers and the two
// adders, and the output register each adder writes. It is what the two
// micro-ROMs of the datapath control unit hold.
package aequam_pkg;

  // ---------------------------------------------------------------- format
  localparam int unsigned NBITS = 20;  // total bits per real number
  localparam int unsigned FRAC  = 18;  // fractional bits
  localparam int unsigned OPC_W = 4;   // opcode bits (12 gates)

  typedef logic signed [NBITS-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  localparam fx_t FX_ZERO = '0;
  localparam fx_t FX_ONE  = fx_t'(1 << FRAC);          // 1.0 = 262144
  // 1/sqrt(2) * 2^18 = 185363.2 -> 185363
  localparam fx_t FX_INV_SQRT2 = fx_t'(185363);

  // Fixed-point product with round-to-nearest (ties toward +infinity).
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*NBITS-1:0] p;
    p = (2*NBITS)'(a) * (2*NBITS)'(b);
    p = p + (2*NBITS)'(1 << (FRAC - 1));
    return fx_t'(p >>> FRAC);
  endfunction

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [OPC_W-1:0] {
    OP_X   = 4'b0000,
    OP_Y   = 4'b0001,
    OP_Z   = 4'b0010,
    OP_H   = 4'b0011,
    OP_S   = 4'b0100,
    OP_SDG = 4'b0101,
    OP_T   = 4'b0110,
    OP_TDG = 4'b0111,
    OP_RX  = 4'b1000,
    OP_RY  = 4'b1001,
    OP_RZ  = 4'b1010,
    OP_U1  = 4'b1011
  } opcode_e;

  // ------------------------------------------------------ micro-operations
  // Operand sources: the couple held in the input registers (a = amplitude
  // with the target bit 0, b = with the target bit 1) and the two product
  // registers written by the multipliers in the previous step.
  typedef enum logic [2:0] {
    SRC_ZERO = 3'd0,
    SRC_AR   = 3'd1,
    SRC_AI   = 3'd2,
    SRC_BR   = 3'd3,
    SRC_BI   = 3'd4,
    SRC_P1   = 3'd5,
    SRC_P2   = 3'd6
  } src_e;

  // Multiplier coefficients: the fixed 1/sqrt(2) or the cosine/sine pair
  // read from the trigonometric unit.
  typedef enum logic [1:0] {
    CF_K   = 2'd0,
    CF_COS = 2'd1,
    CF_SIN = 2'd2
  } coef_e;

  // Adder destinations: the four output registers (a', b').
  typedef enum logic [2:0] {
    DST_NONE = 3'd0,
    DST_AR   = 3'd1,
    DST_AI   = 3'd2,
    DST_BR   = 3'd3,
    DST_BI   = 3'd4
  } dst_e;

  typedef struct packed {
    src_e  m1a;   // multiplier 1: m1a * m1b -> P1
    coef_e m1b;
    src_e  m2a;   // multiplier 2: m2a * m2b -> P2
    coef_e m2b;
    src_e  a1x;   // adder 1: a1x +/- a1y -> a1d
    src_e  a1y;
    logic  a1sub;
    dst_e  a1d;
    src_e  a2x;   // adder 2: a2x +/- a2y -> a2d
    src_e  a2y;
    logic  a2sub;
    dst_e  a2d;
    logic  last;  // final step of the gate
  } uop_t;

  // Builds one micro-word; keeps the micro-ROM tables readable.
  function automatic uop_t mk_uop(
      input src_e m1a, input coef_e m1b, input src_e m2a, input coef_e m2b,
      input src_e a1x, input src_e a1y, input logic a1sub, input dst_e a1d,
      input src_e a2x, input src_e a2y, input logic a2sub, input dst_e a2d,
      input logic last);
    uop_t u;
    u.m1a = m1a; u.m1b = m1b; u.m2a = m2a; u.m2b = m2b;
    u.a1x = a1x; u.a1y = a1y; u.a1sub = a1sub; u.a1d = a1d;
    u.a2x = a2x; u.a2y = a2y; u.a2sub = a2sub; u.a2d = a2d;
    u.last = last;
    return u;
  endfunction

  // Minimum width of an index into n things (at least 1).
  function automatic int unsigned idx_w(input int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

endpackage
