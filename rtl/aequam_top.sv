// aequam_top: FPGA state-vector quantum circuit emulator.
//
// The emulator keeps the full 2^NQ-amplitude state vector on chip and
// applies a compiled circuit one gate instruction at a time. A gate on
// one target qubit acts on disjoint couples of amplitudes picked by a
// butterfly pattern; the couples are processed by identical datapaths
// (all at once with W = 0, in 2^W windows otherwise). A controlled gate is
// the same gate restricted to the couples whose control qubit is 1.
//
// Blocks: the QEP control unit (handshake with the microcontroller and
// phase sequencing), three counters (trigonometric: cos/sin load address;
// window: current window of couples; results: amplitude being read out),
// the bus interface with its two fetching registers, and the quantum
// emulator processor (qpe). The bus is split into bus_in / bus_out /
// bus_oe for an external tri-state buffer.
//
// Interface: from_mcu/to_mcu carry the double handshake described in
// qep_control_unit; bus words are BUS_W = 28 bits. Instructions are
// opcode | target | control | immediate (see qpe_decoder), in the low
// INSTR_W bits of a bus word. Amplitudes are 20-bit fixed point (2 integer,
// 18 fractional bits), sign-extended on the bus.
//
// Defaults are the emulator's main configuration: 5 qubits, full parallel
// (W = 0, 16 datapaths), 16 cos/sin couples (Q = 4), one micro-ROM
// control unit per datapath (S = 0).
//
// Lint note: the linter reports rst_n as used both synchronously and
// asynchronously; the synchronous use is only the `disable iff` of the
// assertions in qpe, not logic.
module aequam_top
  import aequam_pkg::*;
#(
  parameter int unsigned NQ    = 5,
  parameter int unsigned W     = 0,
  parameter int unsigned Q     = 4,
  parameter int unsigned BUS_W = 28,
  parameter int unsigned S     = 0,   // control-unit sharing factor
  localparam int unsigned TQW     = idx_w(NQ),
  localparam int unsigned WW      = idx_w(2**W),
  localparam int unsigned NQW     = $clog2(NQ + 1),
  localparam int unsigned INSTR_W = OPC_W + 2*TQW + Q
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       from_mcu,
  output logic [1:0]       to_mcu,
  input  logic [BUS_W-1:0] bus_in,
  output logic [BUS_W-1:0] bus_out,
  output logic             bus_oe,
  output logic [NQW-1:0]   nq_used,
  output logic             busy
);

  logic             fetch_trig, fetch_instr, send_load, drive;
  logic             init, trig_we, ir_load, win_start, win_done;
  logic             trig_clr, trig_en, trig_last;
  logic             win_clr, win_en, win_last;
  logic             res_clr, res_en, res_last;
  logic [Q:0]       trig_limit, trig_cnt;
  logic [WW-1:0]    win_limit, win_cnt;
  logic [NQ:0]      res_limit, res_cnt;
  fx_t              trig_word;
  logic [BUS_W-1:0] instr_word;
  cplx_t            out_data;
  fx_t              send_data;

  qep_control_unit #(.NQ(NQ), .W(W), .Q(Q), .BUS_W(BUS_W)) u_cu (
    .clk, .rst_n, .from_mcu, .to_mcu,
    .instr_word, .fetch_trig, .fetch_instr, .send_load, .drive,
    .init, .trig_we, .ir_load, .win_start, .win_done,
    .trig_clr, .trig_en, .trig_limit, .trig_last,
    .win_clr, .win_en, .win_limit, .win_last,
    .res_clr, .res_en, .res_limit, .res_last,
    .nq_used, .busy
  );

  qpe_counter #(.WIDTH(Q+1)) u_trig_cnt (
    .clk, .rst_n, .clr(trig_clr), .en(trig_en), .limit(trig_limit),
    .count(trig_cnt), .last(trig_last)
  );

  qpe_counter #(.WIDTH(WW)) u_win_cnt (
    .clk, .rst_n, .clr(win_clr), .en(win_en), .limit(win_limit),
    .count(win_cnt), .last(win_last)
  );

  qpe_counter #(.WIDTH(NQ+1)) u_res_cnt (
    .clk, .rst_n, .clr(res_clr), .en(res_en), .limit(res_limit),
    .count(res_cnt), .last(res_last)
  );

  qpe_bus_if #(.BUS_W(BUS_W)) u_bus_if (
    .clk, .rst_n, .bus_in, .fetch_trig, .fetch_instr,
    .trig_word, .instr_word, .send_load, .send_data, .drive,
    .bus_out, .bus_oe
  );

  // results counter: upper bits pick the basis state, LSB the part
  assign send_data = res_cnt[0] ? out_data.im : out_data.re;

  qpe #(.NQ(NQ), .W(W), .Q(Q), .S(S)) u_qpe (
    .clk, .rst_n,
    .init, .out_addr(res_cnt[NQ:1]), .out_data,
    .trig_we, .trig_waddr(trig_cnt), .trig_wdata(trig_word),
    .ir_load, .instr_in(instr_word[INSTR_W-1:0]),
    .window(win_cnt), .win_start, .win_done
  );

endmodule
