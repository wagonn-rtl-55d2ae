// shift_add: the shift-and-add (S&A) unit of one ADC lane.
//
// Inputs are applied to the crossbar one bit per cycle, least significant bit
// first in this design, and with partial word-line activation each bit is
// further split into several row-group cycles. Each ADC code is therefore a
// partial sum that must be weighted by the place value of its input bit
// (shifted left by bit_pos) and added to the column's running total. With
// clear = 1 (the first bit and first group of an MVM) the running total is
// ignored and the shifted code starts a new one. Purely combinational: the
// result is written back to the output register by the caller.
module shift_add #(
  parameter int unsigned ADC_BITS = wagonn_pkg::ADC_BITS,
  parameter int unsigned IN_BITS  = wagonn_pkg::IN_BITS,
  parameter int unsigned ACC_W    = wagonn_pkg::ADC_BITS + wagonn_pkg::IN_BITS,
  localparam int unsigned BW      = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic [ADC_BITS-1:0] code,
  input  logic [BW-1:0]       bit_pos,
  input  logic                clear,
  input  logic [ACC_W-1:0]    acc_in,
  output logic [ACC_W-1:0]    acc_out
);

  logic [ACC_W-1:0] shifted;

  always_comb begin
    shifted = ACC_W'(code) << bit_pos;
    acc_out = (clear ? '0 : acc_in) + shifted;
  end

endmodule
