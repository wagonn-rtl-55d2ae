// tb_input_register: writes random activations to every row of the input
// register, reads them back in random order and checks the one-cycle read
// latency and that the read data holds while rd_en is low.
module tb_input_register;
  localparam int ROWS = wagonn_pkg::XBAR_ROWS;
  localparam int IB   = wagonn_pkg::IN_BITS;
  localparam int AW   = $clog2(ROWS);

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_row, rd_row;
  logic [IB-1:0] wr_data, rd_data;
  logic [IB-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  input_register u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = '0; rd_row = '0; wr_data = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_row = AW'(r); wr_data = IB'($urandom); ref_mem[r] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int k = 0; k < 2 * ROWS; k++) begin
        automatic int r = $urandom_range(0, ROWS - 1);
        logic [IB-1:0] prev;
        rd_en = 1; rd_row = AW'(r);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_data !== ref_mem[r]) begin
          failures++;
          $display("FAIL row %0d got %h exp %h", r, rd_data, ref_mem[r]);
        end
        // hold while not reading
        prev = rd_data; rd_row = AW'($urandom);
        @(negedge clk);
        checks++;
        if (rd_data !== prev) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
