// tb_qpe_selection: checks the butterfly couple selection.
//
// Every row of the state vector holds its own index (re = k, im = -k), so
// the selected values name the rows that were picked. The reference lists
// the basis states whose target bit is 0 in increasing order: couple j is
// (the j-th such state, that state + 2^t). This is checked for every
// target, every window and random control masks, in a full-parallel
// (W = 0) and a windowed (W = 2) instance of 5 qubits.
`timescale 1ns/1ps
module tb_qpe_selection;
  import aequam_pkg::*;

  localparam int NQ = 5;
  localparam int NS = 32;

  cplx_t        rows [NS];
  logic [2:0]   target;
  logic [NQ-1:0] mask;
  logic [1:0]   window;
  cplx_t        a0 [16], b0 [16];
  logic [15:0]  en0;
  cplx_t        a2 [4], b2 [4];
  logic [3:0]   en2;
  int checks = 0, failures = 0;

  qpe_selection #(.NQ(NQ), .W(0)) dut0 (.rows, .target, .ctrl_mask(mask), .window(1'b0),
                                        .a(a0), .b(b0), .en(en0));
  qpe_selection #(.NQ(NQ), .W(2)) dut2 (.rows, .target, .ctrl_mask(mask), .window,
                                        .a(a2), .b(b2), .en(en2));

  function automatic int ref_i0(input int t, input int j);
    int n = 0;
    for (int k = 0; k < NS; k++)
      if (((k >> t) & 1) == 0) begin
        if (n == j) return k;
        n++;
      end
    return -1;
  endfunction

  task automatic check_couple(input cplx_t a, input cplx_t b, input logic e,
                              input int t, input int j, input string tag);
    int i0, i1;
    bit exp_en;
    i0 = ref_i0(t, j);
    i1 = i0 + (1 << t);
    exp_en = ((i0 & int'(mask)) == int'(mask));
    checks++;
    if (a.re != fx_t'(i0) || a.im != fx_t'(-i0) || b.re != fx_t'(i1) || b.im != fx_t'(-i1) || e != exp_en) begin
      failures++;
      $display("FAIL %s t=%0d j=%0d: got (%0d,%0d) en %0b, expected (%0d,%0d) en %0b",
               tag, t, j, a.re, b.re, e, i0, i1, exp_en);
    end
  endtask

  initial begin
    for (int k = 0; k < NS; k++) rows[k] = '{re: fx_t'(k), im: fx_t'(-k)};
    for (int rep = 0; rep < 6; rep++)
      for (int t = 0; t < NQ; t++) begin
        target = 3'(t);
        mask   = (rep == 0) ? '0 : NQ'(1 << $urandom_range(0, NQ-1));
        if (mask == NQ'(1 << t)) mask = '0;
        for (int w = 0; w < 4; w++) begin
          window = 2'(w);
          #1;
          if (w == 0)
            for (int d = 0; d < 16; d++) check_couple(a0[d], b0[d], en0[d], t, d, "W0");
          for (int d = 0; d < 4; d++) check_couple(a2[d], b2[d], en2[d], t, w*4 + d, "W2");
        end
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
