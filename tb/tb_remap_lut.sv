// tb_remap_lut: loads a random permutation (a tracking vector) into the LUT,
// reads every entry back with one-cycle latency, and checks that the read
// values form a permutation of 0..ROWS-1.
module tb_remap_lut;
  localparam int ROWS = wagonn_pkg::XBAR_ROWS;
  localparam int AW   = $clog2(ROWS);

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_row, wr_dest, rd_row, rd_dest;
  int perm [ROWS];
  bit seen [ROWS];
  int checks = 0, failures = 0;

  remap_lut u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = '0; wr_dest = '0; rd_row = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < ROWS; i++) perm[i] = i;
      for (int i = ROWS - 1; i > 0; i--) begin
        automatic int j = $urandom_range(0, i);
        automatic int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
      end
      for (int i = 0; i < ROWS; i++) begin
        @(negedge clk);
        wr_en = 1; wr_row = AW'(i); wr_dest = AW'(perm[i]);
      end
      @(negedge clk) wr_en = 0;
      foreach (seen[i]) seen[i] = 0;
      for (int i = 0; i < ROWS; i++) begin
        rd_en = 1; rd_row = AW'(i);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (int'(rd_dest) != perm[i]) begin
          failures++;
          $display("FAIL entry %0d got %0d exp %0d", i, rd_dest, perm[i]);
        end
        seen[rd_dest] = 1;
      end
      for (int i = 0; i < ROWS; i++) begin
        checks++;
        if (!seen[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
