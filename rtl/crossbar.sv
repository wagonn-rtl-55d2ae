// crossbar: BEHAVIOURAL MODEL of one G-input in-memory-computing crossbar
// (8T-SRAM, or FeFET), not synthesizable logic in a real chip: the array is an
// analog macro.
//
// Each cell stores one weight bit (bit-slice of 1). Word line r carries input
// bit wl[r] (one input bit per cycle, applied to the access-transistor gate).
// A cell conducts when both its input bit and its weight bit are 1, and the
// sense line of column c sums the cell currents. The model reports that sum
// in units of one ON-cell current, sl[c] = number of rows r with
// wl[r] & w[r][c], i.e. the ideal current. The wire, driver and sink
// resistance effects that WAGONN is designed to reduce are not modelled: the
// model gives the value the analog array approximates.
//
// Weights are written one row at a time (w_wr_*), through the 8T write port.
// The sense-line output follows wl and the stored weights combinationally
// (the array settles within the evaluation cycle).
// Row 0 is the top row; row ROWS-1 is the bottom row, next to the ADC.
module crossbar #(
  parameter int unsigned ROWS = wagonn_pkg::XBAR_ROWS,
  parameter int unsigned COLS = wagonn_pkg::XBAR_COLS,
  localparam int unsigned AW  = $clog2(ROWS),
  localparam int unsigned CW  = $clog2(ROWS + 1)
) (
  input  logic            clk,
  // weight write, one row per cycle
  input  logic            w_wr_en,
  input  logic [AW-1:0]   w_wr_row,
  input  logic [COLS-1:0] w_wr_data,
  // word lines (input bits) and sense-line outputs
  input  logic [ROWS-1:0] wl,
  output logic [CW-1:0]   sl [COLS]
);

  // Stored column by column so that a sense line is one vector.
  logic [ROWS-1:0] wcol [COLS];

  always_ff @(posedge clk) begin
    if (w_wr_en) begin
      for (int c = 0; c < COLS; c++) wcol[c][w_wr_row] <= w_wr_data[c];
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) sl[c] = CW'($countones(wcol[c] & wl));
  end

endmodule
