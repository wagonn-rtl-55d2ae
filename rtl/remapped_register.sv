// remapped_register: the re-mapped input register of one crossbar, an array of
// 8T-SRAM cells whose write and read paths are separate.
//
// Writes go along a row: the IRU puts input activation i into the row given by
// the LUT (write word line + write bit lines). Reads go along a column: the
// read word line of column b is raised and every row's read bit line/sense
// line delivers bit b of its input, so one read returns the whole bit plane b
// (one bit per crossbar row), which is what the crossbar word lines need when
// inputs are streamed one bit per cycle. This row-write / column-read
// organisation follows the paper; the one-cycle registered column read is this
// design's choice.
module remapped_register #(
  parameter int unsigned ROWS    = wagonn_pkg::XBAR_ROWS,
  parameter int unsigned IN_BITS = wagonn_pkg::IN_BITS,
  localparam int unsigned AW     = $clog2(ROWS),
  localparam int unsigned BW     = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic               clk,
  // row write
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_row,
  input  logic [IN_BITS-1:0] wr_data,
  // column (bit-plane) read, one-cycle latency
  input  logic               rd_en,
  input  logic [BW-1:0]      rd_bit,
  output logic [ROWS-1:0]    rd_plane
);

  logic [IN_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int r = 0; r < ROWS; r++) rd_plane[r] <= mem[r][rd_bit];
    end
  end

endmodule
