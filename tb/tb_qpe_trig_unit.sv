// tb_qpe_trig_unit: checks loading and reading of the cos/sin couples.
//
// All 2^Q couples are written through the {couple, half} address a counter
// would produce (half 0 = sine, 1 = cosine) with random values, then every
// immediate must read back its own sine and cosine, before and after a
// second pass that rewrites only some entries.
`timescale 1ns/1ps
module tb_qpe_trig_unit;
  import aequam_pkg::*;

  localparam int Q = 4;
  logic         clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0;
  logic [Q:0]   wr_addr = '0;
  fx_t          wr_data = '0;
  logic [Q-1:0] rd_addr = '0;
  fx_t          sin_v, cos_v;
  fx_t          s_ref [2**Q], c_ref [2**Q];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe_trig_unit #(.Q(Q)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .sin_v, .cos_v);

  task automatic write(input int a, input fx_t v);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = (Q+1)'(a); wr_data = v;
    if (a % 2 == 0) s_ref[a/2] = v; else c_ref[a/2] = v;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read_all();
    for (int i = 0; i < 2**Q; i++) begin
      rd_addr = Q'(i);
      #1;
      checks++;
      if (sin_v != s_ref[i] || cos_v != c_ref[i]) begin
        failures++;
        $display("FAIL couple %0d: sin %0d cos %0d, expected %0d %0d", i, sin_v, cos_v, s_ref[i], c_ref[i]);
      end
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 2**(Q+1); a++) write(a, fx_t'($urandom));
    read_all();
    for (int n = 0; n < 10; n++) write($urandom_range(0, 2**(Q+1)-1), fx_t'($urandom));
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
