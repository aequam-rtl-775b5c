// aequam_host_model: behavioural model of the microcontroller side of the
// emulator bus, with a reference state-vector simulator (testbench only).
//
// It plays the MCU role on the double handshake (from_mcu / to_mcu): it
// starts an emulation by raising from_mcu[1], writes words with a
// four-phase request/acknowledge on bit 0, ends the circuit by dropping
// from_mcu[1] and reads the amplitudes back, real then imaginary part.
// While waiting it checks the protocol: the FPGA must not drive the bus
// during the write phase and must drive it when it acknowledges a read.
//
// Circuit tasks build the instruction words (opcode | target | control |
// immediate), send them, keep a real-valued reference state vector up to
// date with the same gates, read the final state and compare it with the
// reference. Results are counted in `checks` / `failures`. The state read
// back is kept in rd_re/rd_im for further checks by the caller.
//
// The cos/sin table holds the numbers the gate matrix uses: for RX, RY, RZ
// the stored angle is half the rotation angle, for U1 it is the angle.
// `preset_th` fixes the stored angles; otherwise they are random.
`timescale 1ns/1ps
module aequam_host_model #(
  parameter int NQ = 5,
  parameter int Q  = 4
) (
  input  logic        clk,
  input  logic [1:0]  to_mcu,
  output logic [1:0]  from_mcu,
  output logic [27:0] bus_to_fpga,
  input  logic [27:0] bus_from_fpga,
  input  logic        bus_oe
);
  localparam int  NS  = 2**NQ;
  localparam int  TQW = (NQ <= 1) ? 1 : $clog2(NQ);
  localparam real LSB = 1.0 / 262144.0;
  localparam real R2  = 0.70710678118654752;

  int  checks = 0;
  int  failures = 0;
  int  words_written = 0;
  int  words_read = 0;
  real sr [NS], si [NS];
  real tc [2**Q], ts [2**Q];
  real preset_th [$];          // stored angles of the cos/sin couples; random if empty
  real rd_re [NS], rd_im [NS]; // last state read back from the emulator

  initial begin
    from_mcu    = 2'b00;
    bus_to_fpga = '0;
  end

  // protocol monitor
  always @(posedge clk)
    if (from_mcu[1] && bus_oe) begin
      failures++;
      $display("FAIL protocol: FPGA drives the bus in the write phase");
    end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic logic [19:0] q(input real v);
    return 20'($rtoi(v * 262144.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  task automatic wait_to(input int bit_i, input logic val);
    int n = 0;
    while (to_mcu[bit_i] !== val && n < 5000) begin
      @(negedge clk);
      n++;
    end
    if (n == 5000) begin
      failures++;
      $display("FAIL protocol: timeout waiting for to_mcu[%0d] = %0b", bit_i, val);
    end
  endtask

  task automatic begin_emulation();
    @(negedge clk);
    from_mcu = 2'b10;
  endtask

  task automatic write_word(input logic [27:0] w);
    wait_to(0, 1'b1);
    repeat ($urandom_range(0, 3)) @(negedge clk);
    bus_to_fpga = w;
    from_mcu[0] = 1'b1;
    wait_to(0, 1'b0);
    @(negedge clk);
    from_mcu[0] = 1'b0;
    bus_to_fpga = 28'($urandom);   // bus no longer valid
    words_written++;
  endtask

  task automatic end_write();
    wait_to(0, 1'b1);               // last instruction finished
    @(negedge clk);
    from_mcu = 2'b00;
    wait_to(1, 1'b1);
  endtask

  task automatic read_word(output logic [27:0] w);
    wait_to(0, 1'b0);
    @(negedge clk);
    from_mcu[0] = 1'b1;
    wait_to(0, 1'b1);
    checks++;
    if (!bus_oe || !to_mcu[1]) begin
      failures++;
      $display("FAIL protocol: read acknowledged without driving the bus");
    end
    w = bus_from_fpga;
    @(negedge clk);
    from_mcu[0] = 1'b0;
    words_read++;
  endtask

  // ---- reference state-vector simulator
  task automatic ref_reset();
    foreach (sr[k]) begin sr[k] = (k == 0) ? 1.0 : 0.0; si[k] = 0.0; end
  endtask

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
      if (((k >> t) & 1) != 0) continue;
      if (c != t && ((k >> c) & 1) == 0) continue;
      i1 = k + (1 << t);
      ar = sr[k]; ai = si[k]; br = sr[i1]; bi = si[i1];
      sr[k]  = m[0][0]*ar - m[0][1]*ai + m[1][0]*br - m[1][1]*bi;
      si[k]  = m[0][0]*ai + m[0][1]*ar + m[1][0]*bi + m[1][1]*br;
      sr[i1] = m[2][0]*ar - m[2][1]*ai + m[3][0]*br - m[3][1]*bi;
      si[i1] = m[2][0]*ai + m[2][1]*ar + m[3][0]*bi + m[3][1]*br;
    end
  endtask

  // ---- whole emulations
  typedef struct { int op; int t; int c; int imm; } gate_t;

  // angles: couples of (sin, cos) of random angles; nsc = 0 loads none
  task automatic run_circuit(input string name, input int nq, input int nsc,
                             input gate_t gates[$], input real tol);
    logic [27:0] w;
    real th, gr, gi;
    logic [19:0] qs, qc;
    int  namp;
    ref_reset();
    begin_emulation();
    write_word(28'(nsc));
    write_word(28'(nq));
    for (int i = 0; i < nsc; i++) begin
      th = (i < preset_th.size()) ? preset_th[i]
                                  : ($urandom_range(0, 6283) - 3141) / 1000.0;
      ts[i] = real'(signed'(q($sin(th)))) * LSB;
      tc[i] = real'(signed'(q($cos(th)))) * LSB;
      qs = q($sin(th));
      qc = q($cos(th));
      write_word({{8{qs[19]}}, qs});   // sign-extended to the bus width
      write_word({{8{qc[19]}}, qc});
    end
    foreach (gates[g]) begin
      write_word(28'({4'(gates[g].op), TQW'(gates[g].t), TQW'(gates[g].c), Q'(gates[g].imm)}));
      ref_gate(gates[g].op, gates[g].t, gates[g].c, gates[g].imm);
    end
    end_write();
    namp = 2**nq;
    for (int k = 0; k < namp; k++) begin
      read_word(w);
      gr = real'(signed'(w[19:0])) * LSB;
      checks++;
      if (w[27:20] != {8{w[19]}}) begin
        failures++;
        $display("FAIL %s: amplitude %0d real part not sign-extended", name, k);
      end
      read_word(w);
      gi = real'(signed'(w[19:0])) * LSB;
      rd_re[k] = gr;
      rd_im[k] = gi;
      checks++;
      if (fabs(gr - sr[k]) > tol || fabs(gi - si[k]) > tol) begin
        failures++;
        $display("FAIL %s: amplitude %0d = (%f, %f), expected (%f, %f)", name, k, gr, gi, sr[k], si[k]);
      end
    end
    wait_to(1, 1'b0);
  endtask

  // 3-qubit GHZ state (|000> + |111>)/sqrt2: H q0, CX 0->1, CX 1->2
  task automatic run_ghz();
    gate_t g[$];
    g.push_back('{3, 0, 0, 0});
    g.push_back('{0, 1, 0, 0});
    g.push_back('{0, 2, 1, 0});
    run_circuit("ghz", 3, 0, g, 2.0e-5);
    checks++;
    if (fabs(sr[0] - R2) > 1e-9 || fabs(sr[7] - R2) > 1e-9) begin
      failures++;
      $display("FAIL ghz reference");
    end
  endtask

  // three-qubit example: X q0, H q1, CZ(q0 -> q1), CX(q0 -> q2), Y q2
  // final state (-i|001> + i|011>)/sqrt2
  task automatic run_example();
    gate_t g[$];
    g.push_back('{0, 0, 0, 0});
    g.push_back('{3, 1, 1, 0});
    g.push_back('{2, 1, 0, 0});
    g.push_back('{0, 2, 0, 0});
    g.push_back('{1, 2, 2, 0});
    run_circuit("example", 3, 0, g, 2.0e-5);
    checks++;
    if (fabs(si[1] + R2) > 1e-9 || fabs(si[3] - R2) > 1e-9) begin
      failures++;
      $display("FAIL example reference");
    end
  endtask

  // Teleportation of the qubit state cos(a)|0> + e^{ib} sin(a)|1> from q0
  // to q2, with the measurements deferred: the classically controlled X and
  // Z corrections become CX(q1 -> q2) and CZ(q0 -> q2). Couple 0 holds a
  // (RY by 2a), couple 1 holds b (U1).
  task automatic run_teleport(input real a, input real b);
    gate_t g[$];
    preset_th = '{a, b};
    g.push_back('{9, 0, 0, 0});    // RY(2a) q0
    g.push_back('{11, 0, 0, 1});   // U1(b)  q0
    g.push_back('{3, 1, 1, 0});    // H q1
    g.push_back('{0, 2, 1, 0});    // CX q1 -> q2
    g.push_back('{0, 1, 0, 0});    // CX q0 -> q1
    g.push_back('{3, 0, 0, 0});    // H q0
    g.push_back('{0, 2, 1, 0});    // CX q1 -> q2 (X correction)
    g.push_back('{2, 2, 0, 0});    // CZ q0 -> q2 (Z correction)
    run_circuit("teleport", 3, 2, g, 1.0e-4);
    preset_th.delete();
  endtask

  // Three-qubit quantum neural network of the usual feature-map + ansatz
  // shape: ZZ feature map (H, P(2x_i) on each qubit; CX, P(2(pi-x_i)
  // (pi-x_j)), CX on each pair) followed by a real-amplitudes ansatz (RY
  // layer, CX chain, RY layer). 12 distinct angles: couples 0-5 hold the
  // feature-map phases (U1), 6-11 the halves of the RY angles.
  task automatic run_qnn(input real x [3], input real wt [6]);
    gate_t g[$];
    int    pr [3][2] = '{'{0, 1}, '{0, 2}, '{1, 2}};
    preset_th.delete();
    for (int i = 0; i < 3; i++) preset_th.push_back(2.0 * x[i]);
    for (int p = 0; p < 3; p++)
      preset_th.push_back(2.0 * (3.14159265358979 - x[pr[p][0]]) * (3.14159265358979 - x[pr[p][1]]));
    for (int i = 0; i < 6; i++) preset_th.push_back(wt[i] / 2.0);
    for (int i = 0; i < 3; i++) begin
      g.push_back('{3, i, i, 0});               // H
      g.push_back('{11, i, i, i});              // P(2 x_i)
    end
    for (int p = 0; p < 3; p++) begin
      g.push_back('{0, pr[p][1], pr[p][0], 0}); // CX
      g.push_back('{11, pr[p][1], pr[p][1], 3 + p});
      g.push_back('{0, pr[p][1], pr[p][0], 0}); // CX
    end
    for (int i = 0; i < 3; i++) g.push_back('{9, i, i, 6 + i});   // RY layer
    g.push_back('{0, 1, 0, 0});                                    // CX 0 -> 1
    g.push_back('{0, 2, 1, 0});                                    // CX 1 -> 2
    for (int i = 0; i < 3; i++) g.push_back('{9, i, i, 9 + i});   // RY layer
    run_circuit("qnn", 3, 12, g, 2.0e-4);
    preset_th.delete();
  endtask

  // random circuit over all gates, rotations included
  task automatic run_random(input int ngates);
    gate_t g[$];
    for (int n = 0; n < ngates; n++) begin
      gate_t x;
      x.op  = (n < 12) ? n : $urandom_range(0, 11);
      x.t   = $urandom_range(0, NQ-1);
      x.c   = ($urandom_range(0, 1) == 0) ? x.t : $urandom_range(0, NQ-1);
      x.imm = $urandom_range(0, 2**Q - 1);
      if (n % 4 == 0) begin x.op = 3; x.c = x.t; end
      g.push_back(x);
    end
    run_circuit("random", NQ, 2**Q, g, 3.0e-4);
  endtask
endmodule
