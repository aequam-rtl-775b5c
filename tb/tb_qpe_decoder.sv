// tb_qpe_decoder: checks the instruction register and field decoding.
//
// Random instructions are packed here as opcode | target | control |
// immediate (4 + 3 + 3 + 4 bits for 5 qubits and Q = 4) and loaded. The
// decoded fields must match, the control mask must be one-hot on the
// control qubit or zero when control equals target, and the register must
// hold its value while ir_load is low.
`timescale 1ns/1ps
module tb_qpe_decoder;
  import aequam_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0, ir_load = 1'b0;
  logic [13:0] instr_in = '0;
  opcode_e     opcode;
  logic [2:0]  target, control;
  logic [4:0]  ctrl_mask;
  logic [3:0]  qimm;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe_decoder #(.NQ(5), .Q(4)) dut (.clk, .rst_n, .ir_load, .instr_in,
                                    .opcode, .target, .control, .ctrl_mask, .qimm);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int op, t, c, im;
    logic [4:0] exp_mask;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      op = $urandom_range(0, 11);
      t  = $urandom_range(0, 4);
      c  = (n % 3 == 0) ? t : $urandom_range(0, 4);
      im = $urandom_range(0, 15);
      @(negedge clk);
      instr_in = {4'(op), 3'(t), 3'(c), 4'(im)};
      ir_load  = 1'b1;
      @(negedge clk);
      ir_load  = 1'b0;
      instr_in = 14'($urandom);     // must not be captured
      @(negedge clk);
      exp_mask = (c == t) ? 5'b0 : 5'(1 << c);
      checks++;
      if (opcode != opcode_e'(op) || target != 3'(t) || control != 3'(c) ||
          qimm != 4'(im) || ctrl_mask != exp_mask) begin
        failures++;
        $display("FAIL instr op %0d t %0d c %0d imm %0d: got %0d %0d %0d %0d mask %b",
                 op, t, c, im, opcode, target, control, qimm, ctrl_mask);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
