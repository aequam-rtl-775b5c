// tb_qpe_bus_if: checks the two fetching registers and the output path.
//
// Each fetch strobe must capture the bus into its own register only (the
// cos/sin register takes the low 20 bits, the instruction register the
// whole word); `send_load` must put the sign-extended value on bus_out and
// bus_oe must follow `drive` one cycle later.
`timescale 1ns/1ps
module tb_qpe_bus_if;
  import aequam_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [27:0] bus_in = '0, instr_word, bus_out;
  logic        fetch_trig = 0, fetch_instr = 0, send_load = 0, drive = 0, bus_oe;
  fx_t         trig_word, send_data = '0;
  fx_t         exp_trig = '0;
  logic [27:0] exp_instr = '0, exp_out = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe_bus_if #(.BUS_W(28)) dut (.clk, .rst_n, .bus_in, .fetch_trig, .fetch_instr, .trig_word,
                                .instr_word, .send_load, .send_data, .drive, .bus_out, .bus_oe);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic d_prev;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    d_prev = 1'b0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      bus_in      = 28'($urandom);
      fetch_trig  = ($urandom_range(0, 2) == 0);
      fetch_instr = !fetch_trig && ($urandom_range(0, 1) == 0);
      send_load   = ($urandom_range(0, 2) == 0);
      send_data   = fx_t'($urandom);
      d_prev      = drive;
      drive       = $urandom_range(0, 1);
      if (fetch_trig)  exp_trig  = fx_t'(bus_in[19:0]);
      if (fetch_instr) exp_instr = bus_in;
      if (send_load)   exp_out   = {{8{send_data[19]}}, send_data};
      @(negedge clk);
      checks++;
      if (trig_word != exp_trig || instr_word != exp_instr || bus_out != exp_out || bus_oe != drive) begin
        failures++;
        $display("FAIL step %0d: %h %h %h %b, expected %h %h %h %b", n, trig_word, instr_word,
                 bus_out, bus_oe, exp_trig, exp_instr, exp_out, drive);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
