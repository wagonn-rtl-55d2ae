// input_remapping_unit: the Input Re-mapping Unit (IRU) of WAGONN.
//
// WAGONN moves the weight rows of each crossbar so that rows with many 1s sit
// next to the ADC; the inputs must follow the same permutation, and each
// crossbar has its own. The IRU holds, per crossbar, a LUT with the tracking
// vector (remap_lut) and a re-mapped register (remapped_register).
//
// Re-mapping (start .. done): a row counter i runs over 0..ROWS-1. In the cycle
// it presents i, the input register is read at row i and every LUT is read at
// row i. One cycle later row i's data is written into every re-mapped
// register, each at its own destination row. Reads and writes overlap, so one
// row is re-mapped per cycle: ROWS write cycles for all crossbars together,
// plus one cycle to fill the pipeline (done is raised in the cycle of the last
// write; the unit is idle again the cycle after).
//
// Streaming: after re-mapping, plane_rd_en/plane_rd_bit read bit plane b of
// every re-mapped register (one cycle latency); plane[x] drives crossbar x.
//
// Follows the paper: per-crossbar LUT and re-mapped register, shared row index
// and row data, LUT output as the row-decoder address, row write and column
// read. This design's choice: the pipeline timing, the LUT write port and the
// start/done handshake.
module input_remapping_unit #(
  parameter int unsigned NUM_XBAR = wagonn_pkg::NUM_XBAR,
  parameter int unsigned ROWS     = wagonn_pkg::XBAR_ROWS,
  parameter int unsigned IN_BITS  = wagonn_pkg::IN_BITS,
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned XW      = (NUM_XBAR > 1) ? $clog2(NUM_XBAR) : 1,
  localparam int unsigned BW      = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // re-mapping handshake
  input  logic               start,
  output logic               busy,
  output logic               done,
  // row index i and row i's data, to/from the input register
  output logic               ir_rd_en,
  output logic [AW-1:0]      ir_rd_row,
  input  logic [IN_BITS-1:0] ir_rd_data,
  // tracking-vector load (weight deployment time)
  input  logic               lut_wr_en,
  input  logic [XW-1:0]      lut_wr_xbar,
  input  logic [AW-1:0]      lut_wr_row,
  input  logic [AW-1:0]      lut_wr_dest,
  // bit-plane streaming to the crossbars
  input  logic               plane_rd_en,
  input  logic [BW-1:0]      plane_rd_bit,
  output logic [ROWS-1:0]    plane [NUM_XBAR]
);

  logic [AW-1:0] row_cnt;
  logic          rd_phase;   // a row index is being presented this cycle
  logic          wr_phase;   // row data and destinations are valid this cycle
  logic          last_rd;    // row index presented last cycle was ROWS-1
  logic [AW-1:0] dest [NUM_XBAR];

  assign ir_rd_en  = rd_phase;
  assign ir_rd_row = row_cnt;
  assign busy      = rd_phase | wr_phase;
  assign done      = wr_phase & last_rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_cnt  <= '0;
      rd_phase <= 1'b0;
      wr_phase <= 1'b0;
      last_rd  <= 1'b0;
    end else begin
      wr_phase <= rd_phase;
      last_rd  <= rd_phase && (row_cnt == AW'(ROWS - 1));
      if (start && !busy) begin
        rd_phase <= 1'b1;
        row_cnt  <= '0;
      end else if (rd_phase) begin
        if (row_cnt == AW'(ROWS - 1)) rd_phase <= 1'b0;
        else                          row_cnt  <= row_cnt + 1'b1;
      end
    end
  end

  for (genvar x = 0; x < NUM_XBAR; x++) begin : g_xbar
    remap_lut #(.ROWS(ROWS)) u_lut (
      .clk     (clk),
      .wr_en   (lut_wr_en && (lut_wr_xbar == XW'(x))),
      .wr_row  (lut_wr_row),
      .wr_dest (lut_wr_dest),
      .rd_en   (rd_phase),
      .rd_row  (row_cnt),
      .rd_dest (dest[x])
    );

    remapped_register #(.ROWS(ROWS), .IN_BITS(IN_BITS)) u_rreg (
      .clk      (clk),
      .wr_en    (wr_phase),
      .wr_row   (dest[x]),
      .wr_data  (ir_rd_data),
      .rd_en    (plane_rd_en),
      .rd_bit   (plane_rd_bit),
      .rd_plane (plane[x])
    );
  end

  // The tracking vector must not change while it is being used.
  a_no_lut_write_while_busy : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !lut_wr_en);

endmodule
