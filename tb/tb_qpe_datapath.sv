// tb_qpe_datapath: checks the datapath, driven by its micro-ROM control
// unit, on every gate of the instruction set.
//
// For each opcode it applies the gate to random amplitude couples (and
// random angles for the rotational gates), then compares a' and b' with
// the product of the gate matrix and the couple, computed here in real
// arithmetic from the gate definitions. A result passes within 4 LSB of
// the 18-bit fraction (rounding of each product). It also checks the
// number of cycles from start to done for each gate (micro-steps + 1).
`timescale 1ns/1ps
module tb_qpe_datapath;
  import aequam_pkg::*;

  localparam real LSB = 1.0 / 262144.0;
  localparam real TOL = 4.0 * LSB;
  localparam real R2  = 0.70710678118654752;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    start = 1'b0;
  opcode_e opcode = OP_X;
  cplx_t   a_in, b_in, a_out, b_out;
  fx_t     cos_v, sin_v;
  uop_t    uop;
  logic    uop_valid, busy, done;

  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  qpe_dp_cu u_cu (.clk, .rst_n, .start, .opcode, .uop, .uop_valid, .busy, .done);
  qpe_datapath u_dp (.clk, .rst_n, .load(start), .a_in, .b_in, .uop, .uop_valid,
                     .cos_v, .sin_v, .a_out, .b_out);

  function automatic real r(input fx_t v);
    return real'(v) * LSB;
  endfunction
  function automatic fx_t q(input real v);
    return fx_t'($rtoi(v * 262144.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  // expected micro-steps per opcode
  function automatic int steps(input opcode_e op);
    case (op)
      OP_X, OP_Y, OP_T, OP_TDG: return 2;
      OP_Z, OP_S, OP_SDG:       return 1;
      OP_H, OP_U1:              return 3;
      default:                  return 5;
    endcase
  endfunction

  // gate matrix entries (re, im) for stored cosine c and sine s
  task automatic matrix(input opcode_e op, input real c, input real s,
                        output real m[4][2]);
    foreach (m[i, j]) m[i][j] = 0.0;
    case (op)
      OP_X:   begin m[1][0] = 1; m[2][0] = 1; end
      OP_Y:   begin m[1][1] = -1; m[2][1] = 1; end
      OP_Z:   begin m[0][0] = 1; m[3][0] = -1; end
      OP_H:   begin m[0][0] = R2; m[1][0] = R2; m[2][0] = R2; m[3][0] = -R2; end
      OP_S:   begin m[0][0] = 1; m[3][1] = 1; end
      OP_SDG: begin m[0][0] = 1; m[3][1] = -1; end
      OP_T:   begin m[0][0] = 1; m[3][0] = R2; m[3][1] = R2; end
      OP_TDG: begin m[0][0] = 1; m[3][0] = R2; m[3][1] = -R2; end
      OP_RX:  begin m[0][0] = c; m[1][1] = -s; m[2][1] = -s; m[3][0] = c; end
      OP_RY:  begin m[0][0] = c; m[1][0] = -s; m[2][0] = s; m[3][0] = c; end
      OP_RZ:  begin m[0][0] = c; m[0][1] = -s; m[3][0] = c; m[3][1] = s; end
      default: begin m[0][0] = 1; m[3][0] = c; m[3][1] = s; end  // U1
    endcase
  endtask

  task automatic check_val(input string what, input real got, input real exp);
    checks++;
    if (got - exp > TOL || exp - got > TOL) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run_gate(input opcode_e op, input real theta);
    real c, s, m[4][2];
    real ar, ai, br, bi, er[2], ei[2];
    int  cyc;
    ar = ($urandom_range(0, 1400) - 700) / 1000.0;
    ai = ($urandom_range(0, 1400) - 700) / 1000.0;
    br = ($urandom_range(0, 1400) - 700) / 1000.0;
    bi = ($urandom_range(0, 1400) - 700) / 1000.0;
    @(negedge clk);
    a_in   = '{re: q(ar), im: q(ai)};
    b_in   = '{re: q(br), im: q(bi)};
    cos_v  = q($cos(theta));
    sin_v  = q($sin(theta));
    c      = r(cos_v);
    s      = r(sin_v);
    ar = r(a_in.re); ai = r(a_in.im); br = r(b_in.re); bi = r(b_in.im);
    opcode = op;
    start  = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 50) begin
      @(negedge clk);
      cyc++;
    end
    matrix(op, c, s, m);
    // row 0 -> a', row 1 -> b'
    for (int i = 0; i < 2; i++) begin
      er[i] = m[2*i][0]*ar - m[2*i][1]*ai + m[2*i+1][0]*br - m[2*i+1][1]*bi;
      ei[i] = m[2*i][0]*ai + m[2*i][1]*ar + m[2*i+1][0]*bi + m[2*i+1][1]*br;
    end
    check_val($sformatf("%s a'.re", op.name()), r(a_out.re), er[0]);
    check_val($sformatf("%s a'.im", op.name()), r(a_out.im), ei[0]);
    check_val($sformatf("%s b'.re", op.name()), r(b_out.re), er[1]);
    check_val($sformatf("%s b'.im", op.name()), r(b_out.im), ei[1]);
    checks++;
    if (cyc != steps(op) + 1) begin
      failures++;
      $display("FAIL %s: %0d cycles to done, expected %0d", op.name(), cyc, steps(op) + 1);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_in = '0; b_in = '0; cos_v = '0; sin_v = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20; n++)
      for (int op = 0; op < 12; op++)
        run_gate(opcode_e'(op), ($urandom_range(0, 6283) - 3141) / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
