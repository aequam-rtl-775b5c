// tb_qpe_dp_cu: checks the micro-ROM sequencer of the datapath.
//
// For every opcode it starts a gate and records the micro-words issued:
// their number must match the gate's micro-program length, `last` must be
// set only on the final word, `done` must be a single pulse right after
// it, and the words must use the sine/cosine coefficients exactly for the
// rotational gates (opcode MSB = 1, second micro-ROM). A few first words
// are checked field by field against the gate formulas, and every
// micro-program is executed here by a small real-valued interpreter of the
// micro-word fields (products one step ahead of the sums) whose result
// must equal the gate matrix applied to a random couple.
`timescale 1ns/1ps
module tb_qpe_dp_cu;
  import aequam_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    start = 1'b0;
  opcode_e opcode = OP_X;
  uop_t    uop;
  logic    uop_valid, busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe_dp_cu dut (.clk, .rst_n, .start, .opcode, .uop, .uop_valid, .busy, .done);

  function automatic int steps(input int op);
    case (op)
      0, 1, 6, 7: return 2;   // X Y T Tdg
      2, 4, 5:    return 1;   // Z S Sdg
      3, 11:      return 3;   // H U1
      8, 9, 10:   return 5;   // RX RY RZ
      default:    return 1;   // unused opcode: one empty step
    endcase
  endfunction

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  localparam real R2 = 0.70710678118654752;

  function automatic real src(input src_e x, input real v[4], input real p1, input real p2);
    case (x)
      SRC_AR: return v[0];
      SRC_AI: return v[1];
      SRC_BR: return v[2];
      SRC_BI: return v[3];
      SRC_P1: return p1;
      SRC_P2: return p2;
      default: return 0.0;
    endcase
  endfunction

  function automatic real cf(input coef_e x, input real c, input real s);
    return (x == CF_COS) ? c : (x == CF_SIN) ? s : R2;
  endfunction

  // run the recorded micro-program on (a, b) and compare with the matrix
  task automatic interpret(input int op, input uop_t words[$]);
    real v[4], o[4], e[4], p1, p2, n1, n2, c, s, r1, r2, m[4][2];
    foreach (v[i]) v[i] = ($urandom_range(0, 2000) - 1000) / 1000.0;
    c = ($urandom_range(0, 2000) - 1000) / 1000.0;
    s = ($urandom_range(0, 2000) - 1000) / 1000.0;
    o = v; p1 = 0; p2 = 0;
    foreach (words[i]) begin
      n1 = src(words[i].m1a, v, p1, p2) * cf(words[i].m1b, c, s);
      n2 = src(words[i].m2a, v, p1, p2) * cf(words[i].m2b, c, s);
      r1 = words[i].a1sub ? src(words[i].a1x, v, p1, p2) - src(words[i].a1y, v, p1, p2)
                          : src(words[i].a1x, v, p1, p2) + src(words[i].a1y, v, p1, p2);
      r2 = words[i].a2sub ? src(words[i].a2x, v, p1, p2) - src(words[i].a2y, v, p1, p2)
                          : src(words[i].a2x, v, p1, p2) + src(words[i].a2y, v, p1, p2);
      if (words[i].a1d != DST_NONE) o[int'(words[i].a1d) - 1] = r1;
      if (words[i].a2d != DST_NONE) o[int'(words[i].a2d) - 1] = r2;
      p1 = n1; p2 = n2;
    end
    foreach (m[i, j]) m[i][j] = 0.0;
    case (op)
      0:  begin m[1][0] = 1; m[2][0] = 1; end
      1:  begin m[1][1] = -1; m[2][1] = 1; end
      2:  begin m[0][0] = 1; m[3][0] = -1; end
      3:  begin m[0][0] = R2; m[1][0] = R2; m[2][0] = R2; m[3][0] = -R2; end
      4:  begin m[0][0] = 1; m[3][1] = 1; end
      5:  begin m[0][0] = 1; m[3][1] = -1; end
      6:  begin m[0][0] = 1; m[3][0] = R2; m[3][1] = R2; end
      7:  begin m[0][0] = 1; m[3][0] = R2; m[3][1] = -R2; end
      8:  begin m[0][0] = c; m[1][1] = -s; m[2][1] = -s; m[3][0] = c; end
      9:  begin m[0][0] = c; m[1][0] = -s; m[2][0] = s; m[3][0] = c; end
      10: begin m[0][0] = c; m[0][1] = -s; m[3][0] = c; m[3][1] = s; end
      11: begin m[0][0] = 1; m[3][0] = c; m[3][1] = s; end
      default: begin m[0][0] = 1; m[3][0] = 1; end   // identity
    endcase
    for (int i = 0; i < 2; i++) begin
      e[2*i]   = m[2*i][0]*v[0] - m[2*i][1]*v[1] + m[2*i+1][0]*v[2] - m[2*i+1][1]*v[3];
      e[2*i+1] = m[2*i][0]*v[1] + m[2*i][1]*v[0] + m[2*i+1][0]*v[3] + m[2*i+1][1]*v[2];
    end
    for (int i = 0; i < 4; i++) begin
      r1 = o[i] - e[i];
      expect_true(r1 < 1e-9 && r1 > -1e-9, $sformatf("op %0d: micro-program result %0d = %f, expected %f", op, i, o[i], e[i]));
    end
  endtask

  task automatic run(input int op);
    uop_t words[$];
    int   done_cnt, n;
    bit   uses_trig;
    @(negedge clk);
    opcode = opcode_e'(op);
    start  = 1'b1;
    @(negedge clk);
    start = 1'b0;
    done_cnt = 0;
    n = 0;
    while (n < 20 && (uop_valid || done_cnt == 0)) begin
      if (uop_valid) words.push_back(uop);
      if (done) done_cnt++;
      @(negedge clk);
      n++;
    end
    if (done) done_cnt++;
    expect_true(words.size() == steps(op), $sformatf("op %0d: %0d words, expected %0d", op, words.size(), steps(op)));
    expect_true(done_cnt == 1, $sformatf("op %0d: done seen %0d times", op, done_cnt));
    uses_trig = 0;
    foreach (words[i]) begin
      expect_true(words[i].last == (i == words.size() - 1), $sformatf("op %0d: last bit at word %0d", op, i));
      if (words[i].m1b != CF_K || words[i].m2b != CF_K) uses_trig = 1;
    end
    if (op < 12) expect_true(uses_trig == (op >= 8), $sformatf("op %0d: coefficient use", op));
    // first words against the gate formulas
    if (op == 3) expect_true(words[0].m1a == SRC_AR && words[0].m2a == SRC_BR && words[0].m1b == CF_K, "H word 0");
    if (op == 0) expect_true(words[0].a1d == DST_AR && words[0].a1y == SRC_BR && !words[0].a1sub, "X word 0");
    if (op == 2) expect_true(words[0].a1d == DST_BR && words[0].a1sub && words[0].a2d == DST_BI && words[0].a2sub, "Z word 0");
    if (op == 8) expect_true(words[0].m1a == SRC_AR && words[0].m1b == CF_COS && words[0].m2a == SRC_BI && words[0].m2b == CF_SIN, "RX word 0");
    if (op == 11) expect_true(words[0].m1a == SRC_BR && words[0].m1b == CF_COS && words[0].m2a == SRC_BI && words[0].m2b == CF_SIN, "U1 word 0");
    expect_true(!busy, $sformatf("op %0d: idle after done", op));
    for (int k = 0; k < 5; k++) interpret(op, words);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int op = 0; op < 16; op++) run(op);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
