// qpe_selection: butterfly selection of the interacting amplitude couples.
//
// A single-qubit gate on target qubit t acts on 2^(NQ-1) disjoint couples
// of amplitudes: couple j pairs the basis states i0 and i1 = i0 | 2^t,
// where i0 is j with a 0 inserted at bit position t. As t changes, the
// couples follow the butterfly pattern of an FFT. This unit builds, for
// each of the ND datapaths, the couple it must process in the current
// window: j = window * ND + d. The target qubit is the selector of an
// NQ-way multiplexer per datapath (one input per possible target).
//
// For a controlled gate only couples whose basis states have the control
// qubit at 1 are processed; all others see an identity and are skipped.
// `en[d]` reports that the couple of datapath d satisfies the control mask
// (always 1 for a single-qubit gate, whose mask is zero).
//
// Follows the design: butterfly couple selection, target as multiplexer
// selector, control-qubit rule, windows of ND = 2^(NQ-1-W) couples.
// Numbering datapaths and windows by the couple index j is this design's
// choice. Purely combinational.
module qpe_selection
  import aequam_pkg::*;
#(
  parameter int unsigned NQ = 5,   // qubits
  parameter int unsigned W  = 0,   // windowing order
  localparam int unsigned NS  = 2**NQ,
  localparam int unsigned ND  = 2**(NQ-1-W),
  localparam int unsigned TQW = idx_w(NQ),
  localparam int unsigned WW  = idx_w(2**W)
) (
  input  cplx_t          rows [NS],
  input  logic [TQW-1:0] target,
  input  logic [NQ-1:0]  ctrl_mask,
  input  logic [WW-1:0]  window,
  output cplx_t          a    [ND],
  output cplx_t          b    [ND],
  output logic [ND-1:0]  en
);

  // j with a zero inserted at bit t
  function automatic logic [NQ-1:0] insert0(input logic [NQ-1:0] j, input int unsigned t);
    logic [NQ-1:0] low_mask;
    low_mask = NQ'((1 << t) - 1);
    return ((j & ~low_mask) << 1) | (j & low_mask);
  endfunction

  always_comb begin
    for (int unsigned d = 0; d < ND; d++) begin
      logic [NQ-1:0] j, i0, i1;
      j  = NQ'(32'(window) * ND + d);
      i0 = '0;
      for (int unsigned t = 0; t < NQ; t++)
        if (32'(target) == t) i0 = insert0(j, t);
      i1 = i0;
      for (int unsigned t = 0; t < NQ; t++)
        if (32'(target) == t) i1[t] = 1'b1;
      a[d]  = rows[i0];
      b[d]  = rows[i1];
      en[d] = ((i0 & ctrl_mask) == ctrl_mask);
    end
  end

endmodule
