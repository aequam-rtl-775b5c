// tb_qpe_counter: checks clear, enable, wrap-around and the limit flag of
// the counter against a reference count kept here.
`timescale 1ns/1ps
module tb_qpe_counter;
  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [3:0] limit = 4'd9, count;
  logic       last;
  int         ref_cnt = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe_counter #(.WIDTH(4)) dut (.clk, .rst_n, .clr, .en, .limit, .count, .last);

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
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      clr   = ($urandom_range(0, 30) == 0);
      en    = ($urandom_range(0, 3) != 0);
      if (n % 50 == 0) limit = 4'($urandom);
      @(posedge clk);
      if (clr) ref_cnt = 0;
      else if (en) ref_cnt = (ref_cnt + 1) % 16;
      #1;
      checks++;
      if (count != 4'(ref_cnt) || last != (4'(ref_cnt) == limit)) begin
        failures++;
        $display("FAIL step %0d: count %0d last %0b, expected %0d", n, count, last, ref_cnt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
