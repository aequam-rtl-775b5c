// qpe_decoder: instruction register and decoder of the emulator.
//
// The instruction register captures one instruction word on `ir_load` and
// holds it while the gate executes. The decoder splits it into the gate
// opcode, the target qubit, the control qubit and the immediate (the
// address of a cosine/sine couple in the trigonometric unit), and turns the
// control field into a control mask: a one-hot mask of the control qubit,
// or all zeros when the control field equals the target (a single-qubit
// gate). A couple is processed only if all mask bits are set in its index.
//
// Instruction word, MSB first: opcode (4 bits) | target (ceil(log2 NQ)) |
// control (ceil(log2 NQ)) | immediate (Q bits). The field order and widths
// are the design's RISC-like format; placing the opcode at the MSB end is
// this design's choice. Outputs are valid the cycle after `ir_load`.
module qpe_decoder
  import aequam_pkg::*;
#(
  parameter int unsigned NQ = 5,   // qubits of the emulator
  parameter int unsigned Q  = 4,   // immediate bits (2^Q cos/sin couples)
  localparam int unsigned TQW     = idx_w(NQ),
  localparam int unsigned INSTR_W = OPC_W + 2*TQW + Q
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ir_load,
  input  logic [INSTR_W-1:0] instr_in,
  output opcode_e            opcode,
  output logic [TQW-1:0]     target,
  output logic [TQW-1:0]     control,
  output logic [NQ-1:0]      ctrl_mask,
  output logic [Q-1:0]       qimm
);

  logic [INSTR_W-1:0] ir;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ir <= '0;
    else if (ir_load) ir <= instr_in;
  end

  always_comb begin
    opcode  = opcode_e'(ir[INSTR_W-1 -: OPC_W]);
    target  = ir[Q + 2*TQW - 1 -: TQW];
    control = ir[Q + TQW - 1 -: TQW];
    qimm    = ir[Q-1:0];
    ctrl_mask = '0;
    if (control != target && 32'(control) < NQ)
      ctrl_mask[control] = 1'b1;
  end

endmodule
