// qpe: quantum emulator processor, the compute core of the emulator.
//
// It holds the state vector and applies one gate instruction to it. The
// instruction register and decoder split the instruction into opcode,
// target, control mask and immediate; the immediate reads a cosine/sine
// couple from the trigonometric unit. The selection unit picks, for each
// of the ND = 2^(NQ-1-W) datapaths, the couple of amplitudes it must
// process in the current window. The datapaths are driven by micro-ROM
// control units, one per group of 2^S datapaths (sharing factor S; the
// default 0 gives every datapath its own, the recommended choice). When the datapaths finish, the
// reordering unit writes the results back into the state register file.
// With W = 0 (the default, "full parallel") all 2^(NQ-1) couples are
// processed at once; with W > 0 the gate takes 2^W windows, chosen by the
// `window` input from the window counter.
//
// Timing: `ir_load` captures the instruction; from the next cycle on,
// each `win_start` pulse loads the window's couples into the datapaths and
// starts them; `win_done` pulses when their results are being written to
// the register file (written at the end of that cycle). The cycles between
// the two depend on the gate (see qpe_dp_cu).
//
// Follows the design's block structure: instruction register, decoder,
// trigonometric unit, state register file, selection unit, reordering unit,
// replicated datapaths, u-ROM control units shared by 2^S datapaths
// (the S degree of freedom of the architecture generator), window selection
// from an external counter. Couples that fail the control test are still
// computed but not written back (this design's choice).
//
// Lint notes: the decoder's `control` field output is not needed here (the
// control mask carries it) and is left unused. The assertions' `disable
// iff (!rst_n)` makes the linter see rst_n used both synchronously and as
// the asynchronous reset; that use is only in the checks, not in logic.
module qpe
  import aequam_pkg::*;
#(
  parameter int unsigned NQ = 5,   // qubits
  parameter int unsigned W  = 0,   // windowing order
  parameter int unsigned Q  = 4,   // immediate bits (2^Q cos/sin couples)
  parameter int unsigned S  = 0,   // control-unit sharing: 2^S datapaths per CU
  localparam int unsigned NS      = 2**NQ,
  localparam int unsigned ND      = 2**(NQ-1-W),
  localparam int unsigned NCU     = ND >> S,
  localparam int unsigned TQW     = idx_w(NQ),
  localparam int unsigned WW      = idx_w(2**W),
  localparam int unsigned INSTR_W = OPC_W + 2*TQW + Q
) (
  input  logic               clk,
  input  logic               rst_n,
  // state vector initialisation and readout
  input  logic               init,
  input  logic [NQ-1:0]      out_addr,
  output cplx_t              out_data,
  // trigonometric register file loading
  input  logic               trig_we,
  input  logic [Q:0]         trig_waddr,
  input  fx_t                trig_wdata,
  // instruction execution
  input  logic               ir_load,
  input  logic [INSTR_W-1:0] instr_in,
  input  logic [WW-1:0]      window,
  input  logic               win_start,
  output logic               win_done
);

  opcode_e        opcode;
  logic [TQW-1:0] target, control;
  logic [NQ-1:0]  ctrl_mask;
  logic [Q-1:0]   qimm;
  fx_t            sin_v, cos_v;

  cplx_t         rows  [NS];
  cplx_t         wdata [NS];
  logic [NS-1:0] we;

  cplx_t         sel_a [ND];
  cplx_t         sel_b [ND];
  logic [ND-1:0] sel_en;
  logic [ND-1:0] en_q;      // control test of the couples being computed
  cplx_t         res_a [ND];
  cplx_t         res_b [ND];
  logic [NCU-1:0] dp_done;
  logic [NCU-1:0] dp_busy;
  uop_t           cu_uop   [NCU];
  logic           cu_valid [NCU];

  qpe_decoder #(.NQ(NQ), .Q(Q)) u_decoder (
    .clk, .rst_n, .ir_load, .instr_in,
    .opcode, .target, .control, .ctrl_mask, .qimm
  );

  qpe_trig_unit #(.Q(Q)) u_trig (
    .clk, .rst_n,
    .wr_en(trig_we), .wr_addr(trig_waddr), .wr_data(trig_wdata),
    .rd_addr(qimm), .sin_v, .cos_v
  );

  qpe_state_rf #(.NQ(NQ)) u_state_rf (
    .clk, .rst_n, .init, .we, .wdata, .rows, .out_addr, .out_data
  );

  qpe_selection #(.NQ(NQ), .W(W)) u_selection (
    .rows, .target, .ctrl_mask, .window, .a(sel_a), .b(sel_b), .en(sel_en)
  );

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    qpe_dp_cu u_cu (
      .clk, .rst_n, .start(win_start), .opcode,
      .uop(cu_uop[c]), .uop_valid(cu_valid[c]),
      .busy(dp_busy[c]), .done(dp_done[c])
    );
  end

  for (genvar d = 0; d < ND; d++) begin : g_dp
    qpe_datapath u_dp (
      .clk, .rst_n, .load(win_start),
      .a_in(sel_a[d]), .b_in(sel_b[d]),
      .uop(cu_uop[d >> S]), .uop_valid(cu_valid[d >> S]), .cos_v, .sin_v,
      .a_out(res_a[d]), .b_out(res_b[d])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         en_q <= '0;
    else if (win_start) en_q <= sel_en;
  end

  assign win_done = dp_done[0];

  qpe_reorder #(.NQ(NQ), .W(W)) u_reorder (
    .a_res(res_a), .b_res(res_b), .en(en_q), .target, .window,
    .wr(win_done), .we, .wdata
  );

  // All datapaths run the same micro-program and finish together.
  a_dp_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    dp_done == '0 || dp_done == '1);

  // A window is started only when the datapaths are idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    win_start |-> dp_busy == '0);

endmodule
