// tb_qpe_reorder: checks that datapath results go back to the right rows.
//
// Datapath d returns a = 1000 + d and b = 2000 + d, so the written value
// names its source. The reference enumerates couples as the selection unit
// does (j-th basis state with target bit 0, and that state + 2^t) and
// expects row i0 to get a and row i1 to get b of the datapath that owns
// couple j in the current window; rows of other windows, couples whose
// control test failed, and all rows while `wr` is low must not be written.
// Run for a full-parallel (W = 0) and a windowed (W = 2) 5-qubit instance.
`timescale 1ns/1ps
module tb_qpe_reorder;
  import aequam_pkg::*;

  localparam int NQ = 5;
  localparam int NS = 32;

  cplx_t       ra0 [16], rb0 [16], ra2 [4], rb2 [4];
  logic [15:0] en0;
  logic [3:0]  en2;
  logic [2:0]  target;
  logic [1:0]  window;
  logic        wr;
  logic [NS-1:0] we0, we2;
  cplx_t       wd0 [NS], wd2 [NS];
  int checks = 0, failures = 0;

  qpe_reorder #(.NQ(NQ), .W(0)) dut0 (.a_res(ra0), .b_res(rb0), .en(en0), .target, .window(1'b0),
                                      .wr, .we(we0), .wdata(wd0));
  qpe_reorder #(.NQ(NQ), .W(2)) dut2 (.a_res(ra2), .b_res(rb2), .en(en2), .target, .window,
                                      .wr, .we(we2), .wdata(wd2));

  task automatic check_all(input int t, input int w, input int nd, input logic [NS-1:0] we,
                           input cplx_t wd [NS], input logic [15:0] en, input string tag);
    int n = 0;
    bit exp_we [NS];
    int exp_v  [NS];
    foreach (exp_we[k]) begin exp_we[k] = 0; exp_v[k] = 0; end
    for (int k = 0; k < NS; k++)
      if (((k >> t) & 1) == 0) begin
        // couple n = (k, k + 2^t)
        if (n / nd == w && en[n % nd] && wr) begin
          exp_we[k] = 1; exp_v[k] = 1000 + n % nd;
          exp_we[k + (1 << t)] = 1; exp_v[k + (1 << t)] = 2000 + n % nd;
        end
        n++;
      end
    for (int k = 0; k < NS; k++) begin
      checks++;
      if (we[k] != exp_we[k] || (exp_we[k] && wd[k].re != fx_t'(exp_v[k]))) begin
        failures++;
        $display("FAIL %s t=%0d w=%0d row %0d: we %0b data %0d, expected we %0b data %0d",
                 tag, t, w, k, we[k], wd[k].re, exp_we[k], exp_v[k]);
      end
    end
  endtask

  initial begin
    for (int d = 0; d < 16; d++) begin
      ra0[d] = '{re: fx_t'(1000 + d), im: '0};
      rb0[d] = '{re: fx_t'(2000 + d), im: '0};
    end
    for (int d = 0; d < 4; d++) begin
      ra2[d] = '{re: fx_t'(1000 + d), im: '0};
      rb2[d] = '{re: fx_t'(2000 + d), im: '0};
    end
    for (int rep = 0; rep < 4; rep++)
      for (int t = 0; t < NQ; t++)
        for (int w = 0; w < 4; w++) begin
          target = 3'(t);
          window = 2'(w);
          wr     = (rep != 1);
          en0    = (rep == 0) ? '1 : 16'($urandom);
          en2    = (rep == 0) ? '1 : 4'($urandom);
          #1;
          if (w == 0) check_all(t, 0, 16, we0, wd0, en0, "W0");
          check_all(t, w, 4, we2, wd2, {12'b0, en2}, "W2");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
