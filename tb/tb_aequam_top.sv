// tb_aequam_top: end-to-end test of the emulator at its default size
// (5 qubits, full parallel, 16 cos/sin couples).
//
// A host model drives the microcontroller side of the bus and runs three
// emulations back to back: the 3-qubit GHZ circuit, a 3-qubit example
// circuit with controlled Z and controlled X, and a random 5-qubit circuit
// of 40 gates using every opcode and all 16 cos/sin couples. Each final
// state is read over the bus and compared with a reference simulation.
// The test also counts, inside the design, that every mechanism was
// exercised: each of the 12 gates, controlled gates skipping couples,
// rotational gates reading the trigonometric unit, cos/sin loading,
// phase changes of the handshake and the readout, and checks that each
// gate's window takes its micro-program length + 1 cycles.
`timescale 1ns/1ps
module tb_aequam_top;
  import aequam_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [1:0]  from_mcu, to_mcu;
  logic [27:0] bus_in, bus_out;
  logic        bus_oe, busy;
  logic [2:0]  nq_used;
  int checks = 0, failures = 0;

  int gate_count [12];
  int skipped_couples = 0, rot_gates = 0, trig_writes = 0, phase_changes = 0;
  int reads = 0, started = 0, lat_checked = 0, lat_bad = 0;

  always #5 clk = ~clk;

  aequam_top dut (.clk, .rst_n, .from_mcu, .to_mcu, .bus_in, .bus_out, .bus_oe, .nq_used, .busy);

  aequam_host_model #(.NQ(5), .Q(4)) host (.clk, .to_mcu, .from_mcu, .bus_to_fpga(bus_in),
                                           .bus_from_fpga(bus_out), .bus_oe);

  function automatic int steps(input opcode_e op);
    case (op)
      OP_X, OP_Y, OP_T, OP_TDG: return 2;
      OP_Z, OP_S, OP_SDG:       return 1;
      OP_H, OP_U1:              return 3;
      OP_RX, OP_RY, OP_RZ:      return 5;
      default:                  return 1;
    endcase
  endfunction

  // mechanism monitors, sampled between clock edges
  logic [1:0] to_prev = '0;
  int         win_cyc = 0;
  always @(negedge clk) begin
    if (dut.u_qpe.win_start) win_cyc = 1;
    else if (dut.u_qpe.win_done) begin
      gate_count[int'(dut.u_qpe.opcode)]++;
      if (dut.u_qpe.opcode[3]) rot_gates++;
      skipped_couples += $countones(~dut.u_qpe.en_q);
      lat_checked++;
      if (win_cyc != steps(dut.u_qpe.opcode) + 1) begin
        lat_bad++;
        $display("FAIL latency: %s window took %0d cycles", dut.u_qpe.opcode.name(), win_cyc);
      end
      win_cyc = 0;
    end else if (win_cyc != 0) win_cyc++;
    if (dut.u_qpe.trig_we) trig_writes++;
    if (dut.u_bus_if.send_load) reads++;
    if (to_mcu[1] != to_prev[1]) phase_changes++;
    to_prev = to_mcu;
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else
      $display("mechanism %s: %0d", what, n);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + host.checks, failures + host.failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    host.run_ghz();
    host.run_example();
    host.run_random(40);
    for (int op = 0; op < 12; op++) begin
      opcode_e e;
      e = opcode_e'(op);
      need(gate_count[op], e.name());
    end
    need(skipped_couples, "controlled gate skipping couples");
    need(rot_gates, "rotational gate");
    need(trig_writes, "cos/sin loading");
    need(phase_changes, "handshake phase change");
    need(reads, "state readout");
    checks++;
    if (lat_bad != 0 || lat_checked == 0) failures++;
    checks++;
    if (reads != 2 * (8 + 8 + 32)) begin
      failures++;
      $display("FAIL %0d values read, expected %0d", reads, 2 * 48);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + host.checks, failures + host.failures);
    $finish;
  end
endmodule
