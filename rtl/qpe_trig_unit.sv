// qpe_trig_unit: cosine/sine register file for the rotational gates.
//
// The angles of the rotational gates are not computed in hardware: their
// cosine and sine are computed beforehand and loaded here before the
// circuit runs. During loading the trigonometric counter supplies the
// write address: its upper bits select one of the 2^Q couples and its LSB
// selects the half (0 = sine, 1 = cosine). While gates execute, the
// instruction immediate addresses a couple and both halves are read at
// once (combinational read).
//
// Follows the design: register file of 2^Q couples, filled through a
// counter at initialisation, immediate used as the read address. This
// design's choices: the sine-first order within a couple, reset to zero,
// and that the stored values are the ones the gate matrix uses directly
// (cos/sin of theta/2 for RX, RY, RZ; of theta for U1).
module qpe_trig_unit
  import aequam_pkg::*;
#(
  parameter int unsigned Q = 4   // 2^Q cosine/sine couples
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [Q:0]   wr_addr,   // {couple, half}: half 0 = sine, 1 = cosine
  input  fx_t          wr_data,
  input  logic [Q-1:0] rd_addr,   // instruction immediate
  output fx_t          sin_v,
  output fx_t          cos_v
);

  fx_t sin_rf [2**Q];
  fx_t cos_rf [2**Q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2**Q; i++) begin
        sin_rf[i] <= FX_ZERO;
        cos_rf[i] <= FX_ZERO;
      end
    end else if (wr_en) begin
      if (wr_addr[0]) cos_rf[wr_addr[Q:1]] <= wr_data;
      else            sin_rf[wr_addr[Q:1]] <= wr_data;
    end
  end

  assign sin_v = sin_rf[rd_addr];
  assign cos_v = cos_rf[rd_addr];

endmodule
