// tb_remapped_register: writes random inputs row by row, then reads every bit
// plane (column read) and checks that bit r of plane b equals bit b of the
// input stored in row r, one cycle after the read request.
module tb_remapped_register;
  localparam int ROWS = wagonn_pkg::XBAR_ROWS;
  localparam int IB   = wagonn_pkg::IN_BITS;
  localparam int AW   = $clog2(ROWS);
  localparam int BW   = $clog2(IB);

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_row;
  logic [IB-1:0] wr_data;
  logic [BW-1:0] rd_bit;
  logic [ROWS-1:0] rd_plane;
  logic [IB-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  remapped_register u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = '0; wr_data = '0; rd_bit = '0;
    for (int pass = 0; pass < 4; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_row = AW'(r); wr_data = IB'($urandom); ref_mem[r] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int b = 0; b < IB; b++) begin
        rd_en = 1; rd_bit = BW'(b);
        @(negedge clk);
        rd_en = 0;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (rd_plane[r] !== ref_mem[r][b]) begin
            failures++;
            if (failures < 10) $display("FAIL plane %0d row %0d", b, r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
