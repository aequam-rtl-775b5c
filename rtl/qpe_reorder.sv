// qpe_reorder: reordering unit, the inverse of the butterfly selection.
//
// It routes each datapath result back to the state register file row it
// came from. Row k belongs to couple j = k with bit t removed (t = target
// qubit); that couple was processed by datapath d = j mod ND in window
// j / ND, and row k receives the datapath's a output if bit t of k is 0 or
// its b output if it is 1. A row is written when `wr` is high, the couple
// is in the current window and it passed the control-mask test (`en`), so
// couples skipped by a controlled gate keep their value. Like the
// selection unit it is an NQ-way multiplexer per row, with the target as
// selector. Purely combinational.
//
// Follows the design: reordering unit connecting each datapath output to
// its state register. Gating the write with the control test is this
// design's way of skipping the identity couples.
module qpe_reorder
  import aequam_pkg::*;
#(
  parameter int unsigned NQ = 5,
  parameter int unsigned W  = 0,
  localparam int unsigned NS  = 2**NQ,
  localparam int unsigned ND  = 2**(NQ-1-W),
  localparam int unsigned TQW = idx_w(NQ),
  localparam int unsigned WW  = idx_w(2**W),
  localparam int unsigned DW  = idx_w(ND)
) (
  input  cplx_t          a_res [ND],
  input  cplx_t          b_res [ND],
  input  logic [ND-1:0]  en,
  input  logic [TQW-1:0] target,
  input  logic [WW-1:0]  window,
  input  logic           wr,
  output logic [NS-1:0]  we,
  output cplx_t          wdata [NS]
);

  // k with bit t removed
  function automatic logic [NQ-1:0] remove_bit(input logic [NQ-1:0] k, input int unsigned t);
    logic [NQ-1:0] low_mask;
    low_mask = NQ'((1 << t) - 1);
    return ((k >> 1) & ~low_mask) | (k & low_mask);
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < NS; k++) begin
      logic [NQ-1:0] j;
      logic          hi;
      logic [DW-1:0] d;
      int unsigned   wnd;
      j  = '0;
      hi = 1'b0;
      for (int unsigned t = 0; t < NQ; t++)
        if (32'(target) == t) begin
          j  = remove_bit(NQ'(k), t);
          hi = k[t];
        end
      d        = DW'(32'(j) % ND);
      wnd      = 32'(j) / ND;
      wdata[k] = hi ? b_res[d] : a_res[d];
      we[k]    = wr && (wnd == 32'(window)) && en[d];
    end
  end

endmodule
