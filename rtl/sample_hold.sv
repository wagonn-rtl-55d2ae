// sample_hold: BEHAVIOURAL MODEL of the sample-and-hold stage of one crossbar
// (an analog circuit in a real chip).
//
// On a clock edge with sample = 1 it captures all COLS sense-line values and
// holds them until the next sample, so that the ADC(s) shared among the
// columns can convert them one after another. Values are in units of one
// ON-cell current, as produced by the crossbar model.
module sample_hold #(
  parameter int unsigned COLS = wagonn_pkg::XBAR_COLS,
  parameter int unsigned VW   = $clog2(wagonn_pkg::XBAR_ROWS + 1)
) (
  input  logic          clk,
  input  logic          sample,
  input  logic [VW-1:0] sl   [COLS],
  output logic [VW-1:0] held [COLS]
);

  always_ff @(posedge clk) begin
    if (sample) held <= sl;
  end

endmodule
