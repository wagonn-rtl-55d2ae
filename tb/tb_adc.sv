// tb_adc: two ADC configurations side by side: the default (1 converter per
// 128 columns, 8 bits) and 16 converters per crossbar with 4-bit codes, the
// second so that clamping at 2^ADC_BITS-1 is exercised. For each it loads
// random held values, pulses start and checks, cycle by cycle, out_valid,
// out_step, out_last, every lane's code and the total conversion time of
// COLS/ADCS cycles.
module tb_adc;
  localparam int COLS = wagonn_pkg::XBAR_COLS;
  localparam int VW   = $clog2(wagonn_pkg::XBAR_ROWS + 1);
  localparam int A1 = wagonn_pkg::ADCS_PER_XBAR, B1 = wagonn_pkg::ADC_BITS;
  localparam int A2 = 16, B2 = 4;
  localparam int C1 = COLS / A1, C2 = COLS / A2;
  localparam int S1 = (C1 > 1) ? $clog2(C1) : 1, S2 = (C2 > 1) ? $clog2(C2) : 1;

  logic clk = 1'b0, rst_n;
  logic start;
  logic [VW-1:0] held [COLS];
  logic v1, l1, v2, l2;
  logic [S1-1:0] st1;
  logic [S2-1:0] st2;
  logic [B1-1:0] code1 [A1];
  logic [B2-1:0] code2 [A2];
  int checks = 0, failures = 0, n_clamp = 0;

  adc u_dut (.clk, .rst_n, .start, .held, .out_valid(v1), .out_last(l1), .out_step(st1), .code(code1));
  adc #(.ADCS(A2), .ADC_BITS(B2)) u_dut16 (.clk, .rst_n, .start, .held,
        .out_valid(v2), .out_last(l2), .out_step(st2), .code(code2));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endfunction

  initial begin
    rst_n = 0; start = 0;
    for (int c = 0; c < COLS; c++) held[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 6; k++) begin
      for (int c = 0; c < COLS; c++) held[c] = VW'($urandom_range(0, wagonn_pkg::XBAR_ROWS));
      @(negedge clk);
      chk(!v1 && !v2, "idle before start");
      start = 1;
      @(negedge clk);
      start = 0;
      for (int j = 0; j < C1; j++) begin
        chk(v1 && int'(st1) == j && (l1 == (j == C1 - 1)), "ADC x1 timing");
        for (int a = 0; a < A1; a++) begin
          automatic int v = int'(held[a * C1 + j]);
          automatic int e = (v > (1 << B1) - 1) ? (1 << B1) - 1 : v;
          chk(int'(code1[a]) == e, "ADC x1 code");
        end
        if (j < C2) begin
          chk(v2 && int'(st2) == j && (l2 == (j == C2 - 1)), "ADC x16 timing");
          for (int a = 0; a < A2; a++) begin
            automatic int v = int'(held[a * C2 + j]);
            automatic int e = (v > (1 << B2) - 1) ? (1 << B2) - 1 : v;
            if (v > (1 << B2) - 1) n_clamp++;
            chk(int'(code2[a]) == e, "ADC x16 code");
          end
        end else begin
          chk(!v2, "ADC x16 finished after COLS/16 cycles");
        end
        @(negedge clk);
      end
      chk(!v1, "ADC x1 finished after COLS cycles");
    end
    chk(n_clamp > 0, "clamping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
