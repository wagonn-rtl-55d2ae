// tb_sample_hold: checks that the held values take the sense-line values on a
// sample edge and keep them while the sense lines change without sample.
module tb_sample_hold;
  localparam int COLS = wagonn_pkg::XBAR_COLS;
  localparam int VW   = $clog2(wagonn_pkg::XBAR_ROWS + 1);

  logic clk = 1'b0;
  logic sample;
  logic [VW-1:0] sl [COLS];
  logic [VW-1:0] held [COLS];
  logic [VW-1:0] snap [COLS];
  int checks = 0, failures = 0;

  sample_hold u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = 0;
    for (int c = 0; c < COLS; c++) sl[c] = '0;
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin sl[c] = VW'($urandom); snap[c] = sl[c]; end
      sample = 1;
      @(negedge clk);
      sample = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (held[c] !== snap[c]) failures++;
      end
      // change inputs, no sample: must hold
      for (int h = 0; h < 3; h++) begin
        for (int c = 0; c < COLS; c++) sl[c] = VW'($urandom);
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (held[c] !== snap[c]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
