// tb_qep_control_unit: checks the emulator's control unit and handshake.
//
// The control unit (5 qubits, windowing order 2) is connected to real
// counters and to a stand-in for the emulator core that answers every
// window start with a done pulse after a random delay. The test plays the
// microcontroller: it starts an emulation, writes the configuration words,
// cos/sin values and instructions with the four-phase handshake, ends the
// write phase and reads values back. It checks that each word lands in
// the right fetching register, that the cos/sin writes go to consecutive
// trigonometric addresses, that every instruction loads the instruction
// register once and runs exactly 2^W windows in order, that the readout
// gives 2 x 2^n values in increasing order for n qubits in use, and that
// to_mcu follows the protocol.
`timescale 1ns/1ps
module tb_qep_control_unit;
  import aequam_pkg::*;

  localparam int NQ = 5, W = 2, Q = 4;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [1:0]  from_mcu = 2'b00, to_mcu;
  logic [27:0] bus = '0, instr_word;
  logic        fetch_trig, fetch_instr, send_load, drive, init, trig_we, ir_load, win_start;
  logic        win_done = 1'b0;
  logic        trig_clr, trig_en, trig_last, win_clr, win_en, win_last, res_clr, res_en, res_last;
  logic [Q:0]  trig_limit, trig_cnt;
  logic [1:0]  win_limit, win_cnt;
  logic [NQ:0] res_limit, res_cnt;
  logic [2:0]  nq_used;
  logic        busy;
  int checks = 0, failures = 0;
  int n_init = 0, n_trig = 0, n_ir = 0, n_win = 0, n_fetch_t = 0, n_fetch_i = 0;
  int exp_trig_addr = 0, exp_win = 0;

  always #5 clk = ~clk;

  qep_control_unit #(.NQ(NQ), .W(W), .Q(Q), .BUS_W(28)) dut (
    .clk, .rst_n, .from_mcu, .to_mcu, .instr_word, .fetch_trig, .fetch_instr, .send_load, .drive,
    .init, .trig_we, .ir_load, .win_start, .win_done,
    .trig_clr, .trig_en, .trig_limit, .trig_last, .win_clr, .win_en, .win_limit, .win_last,
    .res_clr, .res_en, .res_limit, .res_last, .nq_used, .busy);

  qpe_counter #(.WIDTH(Q+1)) c_trig (.clk, .rst_n, .clr(trig_clr), .en(trig_en), .limit(trig_limit), .count(trig_cnt), .last(trig_last));
  qpe_counter #(.WIDTH(2))   c_win  (.clk, .rst_n, .clr(win_clr), .en(win_en), .limit(win_limit), .count(win_cnt), .last(win_last));
  qpe_counter #(.WIDTH(NQ+1)) c_res (.clk, .rst_n, .clr(res_clr), .en(res_en), .limit(res_limit), .count(res_cnt), .last(res_last));

  // instruction fetching register, as in the bus interface
  always_ff @(posedge clk) if (fetch_instr) instr_word <= bus;
  initial instr_word = '0;

  // stand-in emulator core: done 1..6 cycles after each window start
  initial begin
    forever begin
      @(posedge clk);
      if (win_start) begin
        repeat ($urandom_range(1, 6)) @(posedge clk);
        #1 win_done = 1'b1;
        @(posedge clk);
        #1 win_done = 1'b0;
      end
    end
  end

  task automatic fail(input string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  // monitors
  always @(negedge clk) begin
    if (init) n_init++;
    if (fetch_trig) n_fetch_t++;
    if (fetch_instr) n_fetch_i++;
    if (trig_we) begin
      checks++;
      if (int'(trig_cnt) != exp_trig_addr) fail($sformatf("cos/sin address %0d, expected %0d", trig_cnt, exp_trig_addr));
      exp_trig_addr++;
      n_trig++;
    end
    if (ir_load) begin
      n_ir++;
      exp_win = 0;
    end
    if (win_start) begin
      checks++;
      if (int'(win_cnt) != exp_win) fail($sformatf("window %0d started, expected %0d", win_cnt, exp_win));
      exp_win++;
      n_win++;
    end
    if (from_mcu[1] && drive) fail("bus driven in write phase");
  end

  task automatic wait_to(input int b, input logic v);
    int n = 0;
    while (to_mcu[b] !== v && n < 2000) begin @(negedge clk); n++; end
    if (n == 2000) fail($sformatf("timeout on to_mcu[%0d]", b));
  endtask

  task automatic write_word(input logic [27:0] w);
    wait_to(0, 1'b1);
    @(negedge clk);
    bus = w;
    from_mcu[0] = 1'b1;
    wait_to(0, 1'b0);
    @(negedge clk);
    from_mcu[0] = 1'b0;
    bus = 28'($urandom);
  endtask

  task automatic read_word(output int idx);
    wait_to(0, 1'b0);
    @(negedge clk);
    from_mcu[0] = 1'b1;
    @(posedge clk); @(posedge clk); @(posedge clk);  // synchroniser
    idx = int'(res_cnt);
    wait_to(0, 1'b1);
    checks++;
    if (!to_mcu[1] || !drive) fail("read acknowledged outside read phase");
    @(negedge clk);
    from_mcu[0] = 1'b0;
  endtask

  task automatic emulation(input int nsc, input int nq, input int ninstr);
    int idx, nvals;
    n_init = 0; n_trig = 0; n_ir = 0; n_win = 0; n_fetch_t = 0; n_fetch_i = 0;
    exp_trig_addr = 0;
    @(negedge clk);
    from_mcu = 2'b10;
    write_word(28'(nsc));
    write_word(28'(nq));
    repeat (4) @(negedge clk);   // synchroniser + dispatch
    checks++;
    if (nq_used != 3'(nq)) fail($sformatf("qubits in use %0d, expected %0d", nq_used, nq));
    for (int i = 0; i < 2*nsc; i++) write_word(28'($urandom));
    for (int i = 0; i < ninstr; i++) write_word(28'($urandom));
    wait_to(0, 1'b1);
    @(negedge clk);
    from_mcu = 2'b00;
    wait_to(1, 1'b1);
    nvals = 2 * (2**nq);
    for (int k = 0; k < nvals; k++) begin
      read_word(idx);
      checks++;
      if (idx != k) fail($sformatf("read %0d selected value %0d", k, idx));
    end
    wait_to(1, 1'b0);
    checks++;
    if (to_mcu != 2'b00) fail("to_mcu not idle after readout");
    checks++;
    if (n_init != 1 || n_trig != 2*nsc || n_fetch_t != 2*nsc || n_fetch_i != 2 + ninstr ||
        n_ir != ninstr || n_win != 4*ninstr)
      fail($sformatf("counts init %0d trig %0d fetch %0d/%0d ir %0d windows %0d", n_init, n_trig,
                     n_fetch_t, n_fetch_i, n_ir, n_win));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    emulation(3, 2, 4);
    emulation(0, 3, 2);
    emulation(16, 5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
