// qpe_dp_cu: micro-programmed control unit of one emulator datapath.
//
// Each gate is executed as a short micro-program. Two micro-ROMs hold the
// programs: one for the non-rotational gates (X, Y, Z, H, S, S^dagger, T,
// T^dagger) and one for the rotational gates (RX, RY, RZ, U1). The opcode
// MSB selects the ROM and the opcode picks the first address; on `start`
// the unit steps through consecutive ROM words, presenting one micro-word
// per cycle on `uop` with `uop_valid` high, until a word with its `last`
// bit set has been issued. `done` pulses in the following cycle, when the
// datapath output registers hold the result.
//
// Follows the design: two u-ROMs split non-rotational/rotational, selected
// by the opcode MSB, sequential stepping from a start address to a last
// state, start/done handshake, gate-dependent cycle count. This design's
// own choices: the micro-word format (see aequam_pkg), the ROM contents
// and the start-address table.
//
// Cycles from `start` to `done` (start cycle excluded): steps + 1, with
// steps = X 2, Y 2, Z 1, H 3, S 1, S^dagger 1, T 2, T^dagger 2, RX 5, RY 5,
// RZ 5, U1 3; unused opcodes run one empty step.
module qpe_dp_cu
  import aequam_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,      // begin the gate given by `opcode`
  input  opcode_e    opcode,
  output uop_t       uop,        // micro-word for the datapath
  output logic       uop_valid,  // `uop` is to be executed this cycle
  output logic       busy,
  output logic       done        // one-cycle pulse, result is ready
);

  localparam int unsigned AW = 5;  // covers the larger (rotational) ROM

  localparam src_e  Z  = SRC_ZERO;
  localparam coef_e K  = CF_K;
  localparam coef_e C  = CF_COS;
  localparam coef_e SN = CF_SIN;

  // ---- micro-ROM for non-rotational gates (opcode MSB = 0)
  function automatic uop_t urom_nonrot(input logic [AW-1:0] a);
    case (a)
      // X: a' = b, b' = a
      5'd0:  return mk_uop(Z,K,Z,K, Z,SRC_BR,1'b0,DST_AR, Z,SRC_BI,1'b0,DST_AI, 1'b0);
      5'd1:  return mk_uop(Z,K,Z,K, Z,SRC_AR,1'b0,DST_BR, Z,SRC_AI,1'b0,DST_BI, 1'b1);
      // Y: a' = -i b, b' = i a
      5'd2:  return mk_uop(Z,K,Z,K, Z,SRC_BI,1'b0,DST_AR, Z,SRC_BR,1'b1,DST_AI, 1'b0);
      5'd3:  return mk_uop(Z,K,Z,K, Z,SRC_AI,1'b1,DST_BR, Z,SRC_AR,1'b0,DST_BI, 1'b1);
      // Z: b' = -b
      5'd4:  return mk_uop(Z,K,Z,K, Z,SRC_BR,1'b1,DST_BR, Z,SRC_BI,1'b1,DST_BI, 1'b1);
      // H: a' = (a+b)/sqrt2, b' = (a-b)/sqrt2
      5'd5:  return mk_uop(SRC_AR,K,SRC_BR,K, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd6:  return mk_uop(SRC_AI,K,SRC_BI,K, SRC_P1,SRC_P2,1'b0,DST_AR,
                           SRC_P1,SRC_P2,1'b1,DST_BR, 1'b0);
      5'd7:  return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b0,DST_AI, SRC_P1,SRC_P2,1'b1,DST_BI, 1'b1);
      // S: b' = i b
      5'd8:  return mk_uop(Z,K,Z,K, Z,SRC_BI,1'b1,DST_BR, Z,SRC_BR,1'b0,DST_BI, 1'b1);
      // S^dagger: b' = -i b
      5'd9:  return mk_uop(Z,K,Z,K, Z,SRC_BI,1'b0,DST_BR, Z,SRC_BR,1'b1,DST_BI, 1'b1);
      // T: b' = b (1+i)/sqrt2
      5'd10: return mk_uop(SRC_BR,K,SRC_BI,K, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd11: return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b1,DST_BR, SRC_P1,SRC_P2,1'b0,DST_BI, 1'b1);
      // T^dagger: b' = b (1-i)/sqrt2
      5'd12: return mk_uop(SRC_BR,K,SRC_BI,K, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd13: return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b0,DST_BR, SRC_P2,SRC_P1,1'b1,DST_BI, 1'b1);
      // empty step for unused addresses
      default: return mk_uop(Z,K,Z,K, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b1);
    endcase
  endfunction

  // ---- micro-ROM for rotational gates (opcode MSB = 1); c, s from the
  // trigonometric unit. Products are formed one step ahead of the adder.
  function automatic uop_t urom_rot(input logic [AW-1:0] a);
    case (a)
      // RX: a' = c a - i s b, b' = -i s a + c b
      5'd0:  return mk_uop(SRC_AR,C,SRC_BI,SN, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd1:  return mk_uop(SRC_AI,C,SRC_BR,SN, SRC_P1,SRC_P2,1'b0,DST_AR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd2:  return mk_uop(SRC_BR,C,SRC_AI,SN, SRC_P1,SRC_P2,1'b1,DST_AI, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd3:  return mk_uop(SRC_BI,C,SRC_AR,SN, SRC_P1,SRC_P2,1'b0,DST_BR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd4:  return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b1,DST_BI, Z,Z,1'b0,DST_NONE, 1'b1);
      // RY: a' = c a - s b, b' = s a + c b
      5'd5:  return mk_uop(SRC_AR,C,SRC_BR,SN, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd6:  return mk_uop(SRC_AI,C,SRC_BI,SN, SRC_P1,SRC_P2,1'b1,DST_AR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd7:  return mk_uop(SRC_BR,C,SRC_AR,SN, SRC_P1,SRC_P2,1'b1,DST_AI, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd8:  return mk_uop(SRC_BI,C,SRC_AI,SN, SRC_P1,SRC_P2,1'b0,DST_BR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd9:  return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b0,DST_BI, Z,Z,1'b0,DST_NONE, 1'b1);
      // RZ: a' = (c - i s) a, b' = (c + i s) b
      5'd10: return mk_uop(SRC_AR,C,SRC_AI,SN, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd11: return mk_uop(SRC_AI,C,SRC_AR,SN, SRC_P1,SRC_P2,1'b0,DST_AR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd12: return mk_uop(SRC_BR,C,SRC_BI,SN, SRC_P1,SRC_P2,1'b1,DST_AI, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd13: return mk_uop(SRC_BI,C,SRC_BR,SN, SRC_P1,SRC_P2,1'b1,DST_BR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd14: return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b0,DST_BI, Z,Z,1'b0,DST_NONE, 1'b1);
      // U1: b' = (c + i s) b
      5'd15: return mk_uop(SRC_BR,C,SRC_BI,SN, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd16: return mk_uop(SRC_BI,C,SRC_BR,SN, SRC_P1,SRC_P2,1'b1,DST_BR, Z,Z,1'b0,DST_NONE, 1'b0);
      5'd17: return mk_uop(Z,K,Z,K, SRC_P1,SRC_P2,1'b0,DST_BI, Z,Z,1'b0,DST_NONE, 1'b1);
      default: return mk_uop(Z,K,Z,K, Z,Z,1'b0,DST_NONE, Z,Z,1'b0,DST_NONE, 1'b1);
    endcase
  endfunction

  // ---- first address of each gate's micro-program
  function automatic logic [AW-1:0] start_addr(input opcode_e op);
    case (op)
      OP_X:    return 5'd0;
      OP_Y:    return 5'd2;
      OP_Z:    return 5'd4;
      OP_H:    return 5'd5;
      OP_S:    return 5'd8;
      OP_SDG:  return 5'd9;
      OP_T:    return 5'd10;
      OP_TDG:  return 5'd12;
      OP_RX:   return 5'd0;
      OP_RY:   return 5'd5;
      OP_RZ:   return 5'd10;
      OP_U1:   return 5'd15;
      default: return 5'd31;  // empty step in either ROM
    endcase
  endfunction

  logic          running;
  logic          rom_sel;   // 0 = non-rotational ROM, 1 = rotational ROM
  logic [AW-1:0] addr;

  always_comb begin
    uop       = rom_sel ? urom_rot(addr) : urom_nonrot(addr);
    uop_valid = running;
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      rom_sel <= 1'b0;
      addr    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          running <= 1'b1;
          rom_sel <= opcode[OPC_W-1];
          addr    <= start_addr(opcode);
        end
      end else if (uop.last) begin
        running <= 1'b0;
        done    <= 1'b1;
      end else begin
        addr <= addr + 1'b1;
      end
    end
  end

endmodule
