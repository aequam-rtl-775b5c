// qpe_counter: up-counter used for the trigonometric, window and results
// counters of the emulator.
//
// `clr` returns it to zero, `en` advances it by one. `last` flags that the
// count equals `limit`, the run-time end value (for instance the number of
// cosine/sine values or amplitudes actually in use), so the control unit
// can end a loop without a comparator of its own. Synchronous clear has
// priority over counting; the count wraps past 2^WIDTH-1.
module qpe_counter #(
  parameter int unsigned WIDTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic [WIDTH-1:0] limit,
  output logic [WIDTH-1:0] count,
  output logic             last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (en)  count <= count + 1'b1;
  end

  assign last = (count == limit);

endmodule
