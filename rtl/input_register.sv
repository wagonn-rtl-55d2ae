// input_register: the MVMU input register (IR), an SRAM buffer with one row per
// crossbar row, each row holding one IN_BITS-wide input activation.
//
// It is loaded row by row from outside (register file / core). During input
// re-mapping the IRU reads it by row index i; the read goes through the row
// decoder and sense amplifiers and the data is registered, so rd_data is valid
// the cycle after rd_en. The paper names the block and shows it with drivers,
// row decoder, buffer and sense amplifiers; the one-cycle read latency and the
// separate write port are this design's choice.
module input_register #(
  parameter int unsigned ROWS    = wagonn_pkg::XBAR_ROWS,
  parameter int unsigned IN_BITS = wagonn_pkg::IN_BITS,
  localparam int unsigned AW     = $clog2(ROWS)
) (
  input  logic               clk,
  // write port (row write through the drivers)
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_row,
  input  logic [IN_BITS-1:0] wr_data,
  // read port (row decoder + sense amplifiers), one-cycle latency
  input  logic               rd_en,
  input  logic [AW-1:0]      rd_row,
  output logic [IN_BITS-1:0] rd_data
);

  logic [IN_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end

endmodule
