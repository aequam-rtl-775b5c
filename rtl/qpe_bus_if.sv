// qpe_bus_if: FPGA side of the data bus shared with the microcontroller.
//
// Two fetching registers sample the bus when the control unit says so:
// one takes cosine/sine values, the other takes instructions and the two
// configuration words (number of cosine/sine couples, number of qubits in
// use). Keeping them apart isolates the trigonometric path from the
// instruction path. For the readout an output register holds the 20-bit
// amplitude part being sent, sign-extended to the bus width, and an
// output-enable register tells the external tri-state buffer to drive the
// bus. Everything is registered: fetched words appear the cycle after the
// fetch strobe, the output word the cycle after `send_load`.
//
// Follows the design: two distinct fetching registers (cos/sin; instructions
// and qubit count) and a tri-state bus controlled by the control unit. The
// bus width (28 data bits) comes from the handshake waveform of the design;
// sign extension and the output register are this design's choices. The
// tri-state pad itself stays outside (bus_out/bus_oe).
module qpe_bus_if
  import aequam_pkg::*;
#(
  parameter int unsigned BUS_W = 28
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BUS_W-1:0] bus_in,
  input  logic             fetch_trig,    // sample a cos/sin value
  input  logic             fetch_instr,   // sample an instruction/config word
  output fx_t              trig_word,
  output logic [BUS_W-1:0] instr_word,
  input  logic             send_load,     // capture the value to transmit
  input  fx_t              send_data,
  input  logic             drive,         // FPGA is the transmitter
  output logic [BUS_W-1:0] bus_out,
  output logic             bus_oe
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_word  <= '0;
      instr_word <= '0;
      bus_out    <= '0;
      bus_oe     <= 1'b0;
    end else begin
      if (fetch_trig)  trig_word  <= fx_t'(bus_in[NBITS-1:0]);
      if (fetch_instr) instr_word <= bus_in;
      if (send_load)   bus_out    <= BUS_W'(send_data);  // sign-extended
      bus_oe <= drive;
    end
  end

endmodule
