// tb_aequam_windowed: end-to-end test of the emulator with windowing
// order 2 (5 qubits, 4 datapaths, every gate processed in 4 windows) and
// control-unit sharing factor 2 (one micro-ROM control unit drives all
// four datapaths).
//
// Same flow as the full-parallel test: GHZ, the 3-qubit example circuit
// and a random 5-qubit circuit are run through the bus and the final
// states are compared with a reference simulation. Besides the gate,
// control, rotation, loading, phase and readout mechanisms it checks that
// the window counter steps through all windows of every gate and that
// each gate runs exactly 4 windows.
`timescale 1ns/1ps
module tb_aequam_windowed;
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
  int last_windows = 0, ir_loads = 0;

  always #5 clk = ~clk;

  aequam_top #(.W(2), .S(2)) dut (.clk, .rst_n, .from_mcu, .to_mcu, .bus_in, .bus_out, .bus_oe, .nq_used, .busy);

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
    if (dut.u_qpe.win_done && dut.win_cnt == 2'd3) last_windows++;
    if (dut.u_qpe.ir_load) ir_loads++;
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
    need(last_windows, "last window of a gate");
    checks++;
    if (lat_checked != 4 * ir_loads || last_windows != ir_loads) begin
      failures++;
      $display("FAIL %0d windows for %0d instructions", lat_checked, ir_loads);
    end
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
