// tb_qpe_state_rf: checks the parallel state register file.
//
// After reset and after `init` the file must hold |0...0> (row 0 = 1.0,
// all else 0). Random subsets of rows are then written in one cycle with
// random data; every row is compared with a reference copy on the
// parallel output and on the addressed readout port.
`timescale 1ns/1ps
module tb_qpe_state_rf;
  import aequam_pkg::*;

  localparam int NQ = 5;
  localparam int NS = 32;
  logic          clk = 1'b0, rst_n = 1'b0, init = 1'b0;
  logic [NS-1:0] we = '0;
  cplx_t         wdata [NS];
  cplx_t         rows [NS];
  logic [NQ-1:0] out_addr = '0;
  cplx_t         out_data;
  cplx_t         ref_rf [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpe_state_rf #(.NQ(NQ)) dut (.clk, .rst_n, .init, .we, .wdata, .rows, .out_addr, .out_data);

  task automatic compare(input string tag);
    for (int k = 0; k < NS; k++) begin
      out_addr = NQ'(k);
      #1;
      checks++;
      if (rows[k] != ref_rf[k] || out_data != ref_rf[k]) begin
        failures++;
        $display("FAIL %s row %0d: %h / %h expected %h", tag, k, rows[k], out_data, ref_rf[k]);
      end
    end
  endtask

  task automatic ref_init();
    foreach (ref_rf[k]) ref_rf[k] = '{re: (k == 0) ? FX_ONE : FX_ZERO, im: FX_ZERO};
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wdata[k]) wdata[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    ref_init();
    @(negedge clk);
    compare("reset");
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      we = NS'($urandom);
      foreach (wdata[k]) begin
        wdata[k] = '{re: fx_t'($urandom), im: fx_t'($urandom)};
        if (we[k]) ref_rf[k] = wdata[k];
      end
      @(negedge clk);
      we = '0;
      compare("write");
    end
    init = 1'b1;
    @(negedge clk);
    init = 1'b0;
    ref_init();
    compare("init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
