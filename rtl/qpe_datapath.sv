// qpe_datapath: arithmetic unit that applies a 2x2 gate to one couple of
// probability amplitudes (a, b), where a has the target qubit at 0 and b
// has it at 1.
//
// It has two multipliers and two adders, shared over several cycles under
// the control of the micro-words issued by qpe_dp_cu. On `load` the couple
// is copied into the input registers and into the output registers, so a
// gate that leaves part of the couple unchanged (Z, S, T, U1 leave a) needs
// no operation for it. In every cycle with `uop_valid`:
//   P1 <= m1a * m1b,  P2 <= m2a * m2b        (rounded to nearest)
//   out[a1d] <= a1x +/- a1y,  out[a2d] <= a2x +/- a2y
// The adders read the products of the previous step, so a product and the
// sum that uses it are one cycle apart. Multiplier coefficients are the
// fixed 1/sqrt(2) or the cosine/sine pair of the instruction's immediate.
//
// Follows the design: two adders and two multipliers with data
// dependencies between them, behavioural arithmetic, 20-bit fixed point
// with nearest rounding, gate-dependent number of cycles. The operand
// routing (which register feeds which operator) is this design's own.
// The micro-word's `last` bit is for the control unit and is not used here.
module qpe_datapath
  import aequam_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,       // capture a_in/b_in
  input  cplx_t a_in,
  input  cplx_t b_in,
  input  uop_t  uop,
  input  logic  uop_valid,
  input  fx_t   cos_v,      // coefficients of the rotational gates
  input  fx_t   sin_v,
  output cplx_t a_out,
  output cplx_t b_out
);

  cplx_t a_q, b_q;   // input registers
  fx_t   p1, p2;     // product registers

  function automatic fx_t pick(input src_e s, input cplx_t a, input cplx_t b,
                               input fx_t q1, input fx_t q2);
    case (s)
      SRC_AR:  return a.re;
      SRC_AI:  return a.im;
      SRC_BR:  return b.re;
      SRC_BI:  return b.im;
      SRC_P1:  return q1;
      SRC_P2:  return q2;
      default: return FX_ZERO;
    endcase
  endfunction

  function automatic fx_t coef(input coef_e c, input fx_t cv, input fx_t sv);
    case (c)
      CF_COS:  return cv;
      CF_SIN:  return sv;
      default: return FX_INV_SQRT2;
    endcase
  endfunction

  fx_t m1, m2, s1, s2;

  always_comb begin
    m1 = fx_mul(pick(uop.m1a, a_q, b_q, p1, p2), coef(uop.m1b, cos_v, sin_v));
    m2 = fx_mul(pick(uop.m2a, a_q, b_q, p1, p2), coef(uop.m2b, cos_v, sin_v));
    s1 = uop.a1sub ? pick(uop.a1x, a_q, b_q, p1, p2) - pick(uop.a1y, a_q, b_q, p1, p2)
                   : pick(uop.a1x, a_q, b_q, p1, p2) + pick(uop.a1y, a_q, b_q, p1, p2);
    s2 = uop.a2sub ? pick(uop.a2x, a_q, b_q, p1, p2) - pick(uop.a2y, a_q, b_q, p1, p2)
                   : pick(uop.a2x, a_q, b_q, p1, p2) + pick(uop.a2y, a_q, b_q, p1, p2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      p1    <= '0;
      p2    <= '0;
      a_out <= '0;
      b_out <= '0;
    end else if (load) begin
      a_q   <= a_in;
      b_q   <= b_in;
      a_out <= a_in;
      b_out <= b_in;
    end else if (uop_valid) begin
      p1 <= m1;
      p2 <= m2;
      case (uop.a1d)
        DST_AR:  a_out.re <= s1;
        DST_AI:  a_out.im <= s1;
        DST_BR:  b_out.re <= s1;
        DST_BI:  b_out.im <= s1;
        default: ;
      endcase
      case (uop.a2d)
        DST_AR:  a_out.re <= s2;
        DST_AI:  a_out.im <= s2;
        DST_BR:  b_out.re <= s2;
        DST_BI:  b_out.im <= s2;
        default: ;
      endcase
    end
  end

endmodule
