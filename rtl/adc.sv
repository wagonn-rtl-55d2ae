// adc: BEHAVIOURAL MODEL of the analog-to-digital converters of one crossbar
// (analog circuits in a real chip), with the column multiplexing around them.
//
// ADCS converters share the COLS held sense-line values: converter a owns the
// CPA = COLS/ADCS columns a*CPA .. a*CPA+CPA-1 and converts one of them per
// cycle. After start (a one-cycle pulse, given in the cycle the sample-and-hold
// captures) conversion runs for CPA cycles: in step j (out_step = j) code[a] is
// the conversion of column a*CPA + j, out_valid is 1, and out_last marks
// j = CPA-1. The conversion is ideal and clamps at 2^ADC_BITS-1.
// With one ADC per crossbar (the paper's main case) a 128-column read takes
// 128 cycles; with 16 ADCs it takes 8.
module adc #(
  parameter int unsigned COLS     = wagonn_pkg::XBAR_COLS,
  parameter int unsigned ADCS     = wagonn_pkg::ADCS_PER_XBAR,
  parameter int unsigned VW       = $clog2(wagonn_pkg::XBAR_ROWS + 1),
  parameter int unsigned ADC_BITS = wagonn_pkg::ADC_BITS,
  localparam int unsigned CPA     = COLS / ADCS,
  localparam int unsigned SW      = (CPA > 1) ? $clog2(CPA) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [VW-1:0]       held [COLS],
  output logic                out_valid,
  output logic                out_last,
  output logic [SW-1:0]       out_step,
  output logic [ADC_BITS-1:0] code [ADCS]
);

  localparam int unsigned FULL = (1 << ADC_BITS) - 1;

  logic          busy;
  logic [SW-1:0] step;

  initial begin
    assert (COLS % ADCS == 0) else $error("COLS must be a multiple of ADCS");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      step <= '0;
    end else if (start) begin
      busy <= 1'b1;
      step <= '0;
    end else if (busy) begin
      if (step == SW'(CPA - 1)) busy <= 1'b0;
      else                      step <= step + 1'b1;
    end
  end

  assign out_valid = busy;
  assign out_step  = step;
  assign out_last  = busy && (step == SW'(CPA - 1));

  always_comb begin
    for (int a = 0; a < ADCS; a++) begin
      automatic int unsigned v = int'(held[a * CPA + int'(step)]);
      code[a] = (v > FULL) ? ADC_BITS'(FULL) : ADC_BITS'(v);
    end
  end

endmodule
