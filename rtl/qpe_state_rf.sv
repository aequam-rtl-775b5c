// qpe_state_rf: quantum state register file.
//
// Holds the 2^NQ complex probability amplitudes of the state vector, one
// row per basis state, each row a real and an imaginary 20-bit part. For
// the parallel datapaths every row is readable and writable at once: the
// whole vector is always visible on `rows`, and each row has its own write
// enable and write data, driven by the reordering unit. `init` loads the
// initial state |0...0> (row 0 = 1, all others 0). A third, addressed read
// port (`out_addr`) serves the result readout, selected by the results
// counter.
//
// Follows the design: 2^NQ x NBITS x 2 register file, all rows accessed in
// parallel, initial state set at the start of an emulation. Reset behaviour
// (reset to |0...0>) is this design's choice.
module qpe_state_rf
  import aequam_pkg::*;
#(
  parameter int unsigned NQ = 5,
  localparam int unsigned NS = 2**NQ
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [NS-1:0] we,
  input  cplx_t         wdata [NS],
  output cplx_t         rows  [NS],
  input  logic [NQ-1:0] out_addr,
  output cplx_t         out_data
);

  cplx_t rf [NS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NS; k++) rf[k] <= '{re: (k == 0) ? FX_ONE : FX_ZERO, im: FX_ZERO};
    end else if (init) begin
      for (int k = 0; k < NS; k++) rf[k] <= '{re: (k == 0) ? FX_ONE : FX_ZERO, im: FX_ZERO};
    end else begin
      for (int k = 0; k < NS; k++)
        if (we[k]) rf[k] <= wdata[k];
    end
  end

  assign rows     = rf;
  assign out_data = rf[out_addr];

endmodule
