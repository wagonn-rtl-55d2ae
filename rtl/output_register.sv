// output_register: the MVMU output register (OR), holding one accumulated
// result per column of every crossbar.
//
// During conversion, every ADC lane (crossbar x, converter a) works on column
// a*CPA + step of crossbar x. The register presents that column's current
// total on cur[x][a] (combinational read) for the shift-and-add, and writes
// the updated total upd[x][a] back on the clock edge when wr_en = 1. All lanes
// use the same step. An external read port returns any entry one cycle after
// rd_en. The organisation (one entry per column, per-lane read-modify-write)
// is this design's choice; the paper only names the block.
module output_register #(
  parameter int unsigned NUM_XBAR = wagonn_pkg::NUM_XBAR,
  parameter int unsigned COLS     = wagonn_pkg::XBAR_COLS,
  parameter int unsigned ADCS     = wagonn_pkg::ADCS_PER_XBAR,
  parameter int unsigned ACC_W    = wagonn_pkg::ADC_BITS + wagonn_pkg::IN_BITS,
  localparam int unsigned CPA     = COLS / ADCS,
  localparam int unsigned SW      = (CPA > 1) ? $clog2(CPA) : 1,
  localparam int unsigned XW      = (NUM_XBAR > 1) ? $clog2(NUM_XBAR) : 1,
  localparam int unsigned CAW     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic             clk,
  // lane read-modify-write
  input  logic [SW-1:0]    step,
  output logic [ACC_W-1:0] cur [NUM_XBAR][ADCS],
  input  logic             wr_en,
  input  logic [ACC_W-1:0] upd [NUM_XBAR][ADCS],
  // external read
  input  logic             rd_en,
  input  logic [XW-1:0]    rd_xbar,
  input  logic [CAW-1:0]   rd_col,
  output logic [ACC_W-1:0] rd_data
);

  logic [ACC_W-1:0] mem [NUM_XBAR][COLS];

  always_comb begin
    for (int x = 0; x < NUM_XBAR; x++)
      for (int a = 0; a < ADCS; a++)
        cur[x][a] = mem[x][a * CPA + int'(step)];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int x = 0; x < NUM_XBAR; x++)
        for (int a = 0; a < ADCS; a++)
          mem[x][a * CPA + int'(step)] <= upd[x][a];
    end
    if (rd_en) rd_data <= mem[rd_xbar][rd_col];
  end

endmodule
