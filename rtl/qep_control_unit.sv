// qep_control_unit: top-level control unit of the emulator.
//
// It runs one emulation as three phases and talks to the microcontroller
// through a double handshake on two 2-bit signals: from_mcu (driven by the
// MCU) and to_mcu (driven by the FPGA). Bit 1 of each marks the phase (who
// transmits), bit 0 carries a four-phase request/acknowledge.
//
//  1. Start: from_mcu[1] rising starts an emulation; the state register
//     file is set to |0...0> and the counters are cleared.
//  2. Write phase (from_mcu[1] = 1, MCU transmits). For each word the FPGA
//     raises to_mcu[0] when ready, the MCU puts the word on the bus and
//     raises from_mcu[0], the FPGA samples it and drops to_mcu[0], the MCU
//     drops from_mcu[0]. Words, in order: number of cos/sin couples,
//     number of qubits in use, the cos/sin values (sine then cosine of each
//     couple, written through the trigonometric counter), then instructions.
//     Each instruction is executed (one window after the other, stepped by
//     the window counter) before to_mcu[0] rises again.
//  3. Read phase: from_mcu[1] falling ends the circuit; the FPGA raises
//     to_mcu[1] and drives the bus. For each MCU request (from_mcu[0] = 1)
//     it puts the next amplitude part on the bus (real then imaginary, basis
//     states in increasing order, 2^n of them for n qubits in use) and
//     raises to_mcu[0]; the MCU samples and drops from_mcu[0]; the FPGA
//     drops to_mcu[0]. After the last value to_mcu returns to 00.
//
// from_mcu is synchronised by two flip-flops; to_mcu comes straight from
// the state register. Follows the design: the phase/handshake bit split of
// the two signals, initialisation, gate-by-gate execution and the final
// readout through the results counter, sine/cosine loading through the
// trigonometric counter. The word order, the four-phase order of the edges
// and the synchroniser are this design's choices.
module qep_control_unit
  import aequam_pkg::*;
#(
  parameter int unsigned NQ    = 5,
  parameter int unsigned W     = 0,
  parameter int unsigned Q     = 4,
  parameter int unsigned BUS_W = 28,
  localparam int unsigned WW   = idx_w(2**W),
  localparam int unsigned NQW  = $clog2(NQ + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // handshake with the MCU
  input  logic [1:0]       from_mcu,
  output logic [1:0]       to_mcu,
  // bus interface
  input  logic [BUS_W-1:0] instr_word,
  output logic             fetch_trig,
  output logic             fetch_instr,
  output logic             send_load,
  output logic             drive,
  // emulator core
  output logic             init,
  output logic             trig_we,
  output logic             ir_load,
  output logic             win_start,
  input  logic             win_done,
  // counters
  output logic             trig_clr,
  output logic             trig_en,
  output logic [Q:0]       trig_limit,
  input  logic             trig_last,
  output logic             win_clr,
  output logic             win_en,
  output logic [WW-1:0]    win_limit,
  input  logic             win_last,
  output logic             res_clr,
  output logic             res_en,
  output logic [NQ:0]      res_limit,
  input  logic             res_last,
  // status
  output logic [NQW-1:0]   nq_used,
  output logic             busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_W_READY, S_W_ACK, S_W_DISPATCH,
    S_EXEC_START, S_EXEC_WAIT,
    S_R_WAIT_REQ, S_R_ACK, S_R_NEXT, S_R_END
  } state_e;

  typedef enum logic [1:0] { WK_NSC, WK_NQ, WK_TRIG, WK_INSTR } word_kind_e;

  state_e     state;
  word_kind_e kind;
  logic [1:0] from_s1, from_s;
  logic [Q:0] nsc;       // number of cos/sin couples in use

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      from_s1 <= '0;
      from_s  <= '0;
    end else begin
      from_s1 <= from_mcu;
      from_s  <= from_s1;
    end
  end

  // ---- next-state and registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      kind    <= WK_NSC;
      nsc     <= '0;
      nq_used <= NQW'(NQ);
    end else begin
      case (state)
        S_IDLE:
          if (from_s[1]) state <= S_INIT;
        S_INIT: begin
          kind  <= WK_NSC;
          state <= S_W_READY;
        end
        S_W_READY:
          if (!from_s[1])     state <= S_R_WAIT_REQ;
          else if (from_s[0]) state <= S_W_ACK;
        S_W_ACK:
          if (!from_s[0]) state <= S_W_DISPATCH;
        S_W_DISPATCH: begin
          state <= S_W_READY;
          case (kind)
            WK_NSC: begin
              nsc  <= (instr_word > BUS_W'(2**Q)) ? (Q+1)'(2**Q) : instr_word[Q:0];
              kind <= WK_NQ;
            end
            WK_NQ: begin
              nq_used <= (instr_word == '0 || instr_word > BUS_W'(NQ))
                         ? NQW'(NQ) : instr_word[NQW-1:0];
              kind    <= (nsc == '0) ? WK_INSTR : WK_TRIG;
            end
            WK_TRIG:
              if (trig_last) kind <= WK_INSTR;
            WK_INSTR:
              state <= S_EXEC_START;
          endcase
        end
        S_EXEC_START:
          state <= S_EXEC_WAIT;
        S_EXEC_WAIT:
          if (win_done) state <= win_last ? S_W_READY : S_EXEC_START;
        S_R_WAIT_REQ:
          if (from_s[0]) state <= S_R_ACK;
        S_R_ACK:
          if (!from_s[0]) state <= S_R_NEXT;
        S_R_NEXT:
          state <= res_last ? S_R_END : S_R_WAIT_REQ;
        S_R_END:
          state <= S_IDLE;
        default:
          state <= S_IDLE;
      endcase
    end
  end

  // ---- outputs
  always_comb begin
    to_mcu      = 2'b00;
    fetch_trig  = 1'b0;
    fetch_instr = 1'b0;
    send_load   = 1'b0;
    drive       = 1'b0;
    init        = 1'b0;
    trig_we     = 1'b0;
    ir_load     = 1'b0;
    win_start   = 1'b0;
    trig_clr    = 1'b0;
    trig_en     = 1'b0;
    win_clr     = 1'b0;
    win_en      = 1'b0;
    res_clr     = 1'b0;
    res_en      = 1'b0;
    case (state)
      S_INIT: begin
        init     = 1'b1;
        trig_clr = 1'b1;
        win_clr  = 1'b1;
        res_clr  = 1'b1;
      end
      S_W_READY: begin
        to_mcu = 2'b01;
        if (from_s[1] && from_s[0]) begin
          fetch_trig  = (kind == WK_TRIG);
          fetch_instr = (kind != WK_TRIG);
        end
      end
      S_W_DISPATCH: begin
        if (kind == WK_TRIG) begin
          trig_we = 1'b1;
          trig_en = 1'b1;
        end
        if (kind == WK_INSTR) begin
          ir_load = 1'b1;
          win_clr = 1'b1;
        end
      end
      S_EXEC_START:
        win_start = 1'b1;
      S_EXEC_WAIT:
        win_en = win_done && !win_last;
      S_R_WAIT_REQ: begin
        to_mcu    = 2'b10;
        drive     = 1'b1;
        send_load = from_s[0];
      end
      S_R_ACK: begin
        to_mcu = 2'b11;
        drive  = 1'b1;
      end
      S_R_NEXT: begin
        to_mcu = 2'b10;
        drive  = 1'b1;
        res_en = !res_last;
      end
      default: ;
    endcase
  end

  assign trig_limit = (nsc == '0) ? '0 : (Q+1)'((32'(nsc) << 1) - 1);
  assign win_limit  = WW'(2**W - 1);
  assign res_limit  = (NQ+1)'((2 << nq_used) - 1);
  assign busy       = (state != S_IDLE);

endmodule
