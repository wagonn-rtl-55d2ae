// remap_lut: one crossbar's look-up table in the Input Re-mapping Unit. Entry i
// holds the WAGONN tracking-vector value for source row i: the crossbar row
// (destination) that row i's weights were moved to when the weights were
// deployed. Rows with the largest row-sum go to the highest row numbers, which
// are the rows nearest the ADC.
//
// Written once, when the weights are deployed (the tracking vector is computed
// in software). Read by row index during re-mapping with one-cycle latency,
// in the same cycle as the input register, so both results arrive together.
// The write port and the latency are this design's choice.
module remap_lut #(
  parameter int unsigned ROWS = wagonn_pkg::XBAR_ROWS,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_row,
  input  logic [AW-1:0] wr_dest,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_row,
  output logic [AW-1:0] rd_dest
);

  logic [AW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_dest;
    if (rd_en) rd_dest <= mem[rd_row];
  end

endmodule
