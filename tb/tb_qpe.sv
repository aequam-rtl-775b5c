// tb_qpe: runs random circuits on the emulator core and compares the whole
// state vector with a reference state-vector simulation.
//
// Two 5-qubit cores get the same stimulus: a full-parallel one (W = 0, 16
// datapaths, one window per gate) and a windowed one (W = 2, 4 datapaths,
// four windows per gate, stepped here as the window counter would; S = 1,
// so each micro-ROM control unit drives two datapaths). The
// cos/sin register file is loaded with random angles. Each instruction has
// a random gate, target, control (half of them controlled) and immediate.
// The reference applies the gate's 2x2 matrix to every couple whose
// control qubit is 1, in real arithmetic. After every gate all 32
// amplitudes of both cores must be within 2e-4 of the reference, and each
// window must take the gate's micro-program length + 1 cycles.
`timescale 1ns/1ps
module tb_qpe;
  import aequam_pkg::*;

  localparam int  NQ  = 5;
  localparam int  NS  = 32;
  localparam int  Q   = 4;
  localparam real LSB = 1.0 / 262144.0;
  localparam real TOL = 2.0e-4;
  localparam real R2  = 0.70710678118654752;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        init = 1'b0, trig_we = 1'b0, ir_load = 1'b0;
  logic        start0 = 1'b0, start2 = 1'b0;
  logic [Q:0]  trig_waddr = '0;
  fx_t         trig_wdata = '0;
  logic [13:0] instr_in = '0;
  logic [1:0]  window = '0;
  logic [NQ-1:0] out_addr = '0;
  cplx_t       out0, out2;
  logic        done0, done2;
  real         sr [NS], si [NS];
  real         tc [2**Q], ts [2**Q];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe #(.NQ(NQ), .W(0), .Q(Q)) dut0 (.clk, .rst_n, .init, .out_addr, .out_data(out0),
    .trig_we, .trig_waddr, .trig_wdata, .ir_load, .instr_in, .window(1'b0),
    .win_start(start0), .win_done(done0));
  qpe #(.NQ(NQ), .W(2), .Q(Q), .S(1)) dut2 (.clk, .rst_n, .init, .out_addr, .out_data(out2),
    .trig_we, .trig_waddr, .trig_wdata, .ir_load, .instr_in, .window,
    .win_start(start2), .win_done(done2));

  function automatic fx_t q(input real v);
    return fx_t'($rtoi(v * 262144.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic int steps(input int op);
    case (op)
      0, 1, 6, 7: return 2;
      2, 4, 5:    return 1;
      3, 11:      return 3;
      default:    return 5;
    endcase
  endfunction

  // reference: apply gate op on target t, controlled by c (c == t: none)
  task automatic ref_gate(input int op, input int t, input int c, input int imm);
    real m[4][2], ar, ai, br, bi, cv, sv;
    int  i1;
    cv = tc[imm]; sv = ts[imm];
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
      8:  begin m[0][0] = cv; m[1][1] = -sv; m[2][1] = -sv; m[3][0] = cv; end
      9:  begin m[0][0] = cv; m[1][0] = -sv; m[2][0] = sv; m[3][0] = cv; end
      10: begin m[0][0] = cv; m[0][1] = -sv; m[3][0] = cv; m[3][1] = sv; end
      default: begin m[0][0] = 1; m[3][0] = cv; m[3][1] = sv; end
    endcase
    for (int k = 0; k < NS; k++) begin
      if ((k >> t) & 1) continue;
      if (c != t && !((k >> c) & 1)) continue;
      i1 = k + (1 << t);
      ar = sr[k]; ai = si[k]; br = sr[i1]; bi = si[i1];
      sr[k]  = m[0][0]*ar - m[0][1]*ai + m[1][0]*br - m[1][1]*bi;
      si[k]  = m[0][0]*ai + m[0][1]*ar + m[1][0]*bi + m[1][1]*br;
      sr[i1] = m[2][0]*ar - m[2][1]*ai + m[3][0]*br - m[3][1]*bi;
      si[i1] = m[2][0]*ai + m[2][1]*ar + m[3][0]*bi + m[3][1]*br;
    end
  endtask

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic compare(input string tag);
    for (int k = 0; k < NS; k++) begin
      out_addr = NQ'(k);
      #1;
      checks++;
      if (fabs(real'(out0.re) * LSB - sr[k]) > TOL || fabs(real'(out0.im) * LSB - si[k]) > TOL ||
          fabs(real'(out2.re) * LSB - sr[k]) > TOL || fabs(real'(out2.im) * LSB - si[k]) > TOL) begin
        failures++;
        $display("FAIL %s amp %0d: W0 (%f,%f) W2 (%f,%f) expected (%f,%f)", tag, k,
                 real'(out0.re) * LSB, real'(out0.im) * LSB, real'(out2.re) * LSB,
                 real'(out2.im) * LSB, sr[k], si[k]);
      end
    end
  endtask

  // one window: start the windowed core (and, with `wide`, the full-parallel
  // core too, which finishes in the same cycle) and wait for done
  task automatic run_window(input int w, input int op, input bit wide);
    int cyc;
    @(negedge clk);
    window = 2'(w);
    start0 = wide;
    start2 = 1'b1;
    @(negedge clk);
    start0 = 1'b0;
    start2 = 1'b0;
    cyc = 1;
    while (!done2 && cyc < 40) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != steps(op) + 1 || (wide && !done0)) begin
      failures++;
      $display("FAIL op %0d window %0d: %0d cycles, expected %0d", op, w, cyc, steps(op) + 1);
    end
  endtask

  task automatic run_instr(input int op, input int t, input int c, input int imm);
    @(negedge clk);
    instr_in = {4'(op), 3'(t), 3'(c), 4'(imm)};
    ir_load  = 1'b1;
    @(negedge clk);
    ir_load  = 1'b0;
    // both cores start together on window 0; the windowed core then
    // runs its remaining windows
    run_window(0, op, 1'b1);
    for (int w = 1; w < 4; w++) run_window(w, op, 1'b0);
    @(negedge clk);
    ref_gate(op, t, c, imm);
    compare($sformatf("op %0d t %0d c %0d", op, t, c));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real th;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // cos/sin table with random angles
    for (int i = 0; i < 2**Q; i++) begin
      th = ($urandom_range(0, 6283) - 3141) / 1000.0;
      @(negedge clk);
      trig_we = 1'b1; trig_waddr = (Q+1)'(2*i); trig_wdata = q($sin(th));
      ts[i] = real'(trig_wdata) * LSB;
      @(negedge clk);
      trig_waddr = (Q+1)'(2*i + 1); trig_wdata = q($cos(th));
      tc[i] = real'(trig_wdata) * LSB;
    end
    @(negedge clk);
    trig_we = 1'b0;
    for (int circ = 0; circ < 4; circ++) begin
      init = 1'b1;
      @(negedge clk);
      init = 1'b0;
      foreach (sr[k]) begin sr[k] = (k == 0) ? 1.0 : 0.0; si[k] = 0.0; end
      compare("init");
      for (int g = 0; g < 24; g++) begin
        int op, t, c;
        op = (g < 12) ? g : $urandom_range(0, 11);
        t  = $urandom_range(0, NQ-1);
        c  = ($urandom_range(0, 1) == 0) ? t : $urandom_range(0, NQ-1);
        // keep some superposition going
        if (g % 4 == 0) begin op = 3; c = t; end
        run_instr(op, t, c, $urandom_range(0, 2**Q - 1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
