// tb_aequam_workloads: the kinds of circuits the emulator was evaluated
// with, run end to end through the bus.
//
// Three emulators are built: the default one (5 qubits, full parallel, 16
// cos/sin couples), a 3-qubit full-parallel one, the size used for the
// waveform walk-through of a three-qubit GHZ ("Bell state") circuit, and a
// fully serial 6-qubit one. Each is driven by its own behavioural
// microcontroller model, which also keeps a reference simulation and
// compares every amplitude read back.
//
//   * 3-qubit emulator: GHZ circuit, final state (|000> + |111>)/sqrt2.
//   * default emulator: quantum teleportation with deferred measurement.
//     Independently of the reference, the result must be |+>|+>|psi>, so
//     every amplitude k equals psi(bit 2 of k) / 2 and the probability of
//     q2 = 1 equals sin^2(a) of the teleported state.
//   * serial 6-qubit emulator (NQ = 6, W = 5: one datapath, 32 windows per
//     gate), the configuration compared with other emulators: a random
//     24-gate circuit, and the window count of every gate.
//   * default emulator: a 3-qubit quantum neural network (ZZ feature map
//     plus real-amplitudes ansatz, 12 distinct angles). Besides the
//     reference comparison, the read-back state must stay normalised.
//
// The circuits themselves (gate lists, angles) are standard textbook forms
// chosen here; the measurement of teleportation is replaced by controlled
// corrections because the emulator returns the state vector instead of
// measuring. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_aequam_workloads;
  import aequam_pkg::*;

  localparam real TA = 0.6;   // teleported state cos(TA)|0> + e^{i TB} sin(TA)|1>
  localparam real TB = 1.1;

  logic        clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // default emulator
  logic [1:0]  from5, to5;
  logic [27:0] bin5, bout5;
  logic        oe5, busy5;
  logic [2:0]  nq5;

  aequam_top dut5 (.clk, .rst_n, .from_mcu(from5), .to_mcu(to5), .bus_in(bin5),
                   .bus_out(bout5), .bus_oe(oe5), .nq_used(nq5), .busy(busy5));

  aequam_host_model #(.NQ(5), .Q(4)) host5 (.clk, .to_mcu(to5), .from_mcu(from5),
                                            .bus_to_fpga(bin5), .bus_from_fpga(bout5), .bus_oe(oe5));

  // 3-qubit full-parallel emulator
  logic [1:0]  from3, to3;
  logic [27:0] bin3, bout3;
  logic        oe3, busy3;
  logic [1:0]  nq3;

  aequam_top #(.NQ(3)) dut3 (.clk, .rst_n, .from_mcu(from3), .to_mcu(to3), .bus_in(bin3),
                             .bus_out(bout3), .bus_oe(oe3), .nq_used(nq3), .busy(busy3));

  aequam_host_model #(.NQ(3), .Q(4)) host3 (.clk, .to_mcu(to3), .from_mcu(from3),
                                            .bus_to_fpga(bin3), .bus_from_fpga(bout3), .bus_oe(oe3));

  // serial 6-qubit emulator: one datapath, 32 windows per gate
  logic [1:0]  from6, to6;
  logic [27:0] bin6, bout6;
  logic        oe6, busy6;
  logic [2:0]  nq6;
  int          windows6 = 0;

  aequam_top #(.NQ(6), .W(5)) dut6 (.clk, .rst_n, .from_mcu(from6), .to_mcu(to6), .bus_in(bin6),
                                    .bus_out(bout6), .bus_oe(oe6), .nq_used(nq6), .busy(busy6));

  aequam_host_model #(.NQ(6), .Q(4)) host6 (.clk, .to_mcu(to6), .from_mcu(from6),
                                            .bus_to_fpga(bin6), .bus_from_fpga(bout6), .bus_oe(oe6));

  always @(negedge clk)
    if (dut6.u_qpe.win_done) windows6++;

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d",
             checks + host5.checks + host3.checks + host6.checks,
             failures + host5.failures + host3.failures + host6.failures);
    $finish;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    finish();
  end

  initial begin
    real psi_re [2], psi_im [2];
    real p1, norm, x [3], wt [6];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // GHZ on the 3-qubit emulator
    host3.run_ghz();
    check(nq3 == 2'd3, "3-qubit emulator reports 3 qubits in use");
    check(fabs(host3.rd_re[0] - 0.70710678) < 1e-4 && fabs(host3.rd_re[7] - 0.70710678) < 1e-4,
          "GHZ amplitudes of |000> and |111>");

    // teleportation on the default emulator
    host5.run_teleport(TA, TB);
    check(nq5 == 3'd3, "teleport uses 3 qubits");
    psi_re[0] = $cos(TA);             psi_im[0] = 0.0;
    psi_re[1] = $cos(TB) * $sin(TA);  psi_im[1] = $sin(TB) * $sin(TA);
    p1 = 0.0;
    for (int k = 0; k < 8; k++) begin
      check(fabs(host5.rd_re[k] - psi_re[k >> 2] / 2.0) < 1e-4 &&
            fabs(host5.rd_im[k] - psi_im[k >> 2] / 2.0) < 1e-4,
            $sformatf("teleport amplitude %0d = psi(q2)/2", k));
      if (k >= 4) p1 += host5.rd_re[k]**2 + host5.rd_im[k]**2;
    end
    check(fabs(p1 - $sin(TA)**2) < 1e-4, "teleport P(q2 = 1) = sin^2(a)");

    // quantum neural network on the default emulator
    x  = '{0.3, 1.2, 2.5};
    wt = '{0.7, -1.4, 2.2, 0.4, -0.9, 1.6};
    host5.run_qnn(x, wt);
    norm = 0.0;
    for (int k = 0; k < 8; k++) norm += host5.rd_re[k]**2 + host5.rd_im[k]**2;
    check(fabs(norm - 1.0) < 1e-3, "QNN state stays normalised");

    // random 6-qubit circuit on the serial emulator
    host6.run_random(24);
    check(nq6 == 3'd6, "serial emulator reports 6 qubits in use");
    check(windows6 == 24 * 32, $sformatf("serial emulator ran %0d windows, expected %0d", windows6, 24 * 32));

    $display("workloads: GHZ (3-qubit), teleport and QNN (default), random 6-qubit (serial) done");
    finish();
  end
endmodule
