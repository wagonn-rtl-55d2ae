// tb_output_register: uses a small configuration (2 crossbars, 16 columns,
// 4 lanes per crossbar). Sweeps the step over all columns, writing random
// values through every lane, checks the lane read (cur) of each column against
// a reference, and reads every entry through the external port.
module tb_output_register;
  localparam int NX = 2, COLS = 16, ADCS = 4, ACC = 16;
  localparam int CPA = COLS / ADCS;
  localparam int SW = $clog2(CPA), XW = 1, CAW = $clog2(COLS);

  logic clk = 1'b0;
  logic [SW-1:0] step;
  logic [ACC-1:0] cur [NX][ADCS];
  logic wr_en;
  logic [ACC-1:0] upd [NX][ADCS];
  logic rd_en;
  logic [XW-1:0] rd_xbar;
  logic [CAW-1:0] rd_col;
  logic [ACC-1:0] rd_data;
  logic [ACC-1:0] ref_mem [NX][COLS];
  int checks = 0, failures = 0;

  output_register #(.NUM_XBAR(NX), .COLS(COLS), .ADCS(ADCS), .ACC_W(ACC)) u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; step = '0; rd_xbar = '0; rd_col = '0;
    for (int x = 0; x < NX; x++) for (int a = 0; a < ADCS; a++) upd[x][a] = '0;
    for (int pass = 0; pass < 4; pass++) begin
      for (int j = 0; j < CPA; j++) begin
        @(negedge clk);
        step = SW'(j); wr_en = 1;
        for (int x = 0; x < NX; x++)
          for (int a = 0; a < ADCS; a++) begin
            upd[x][a] = ACC'($urandom);
            ref_mem[x][a * CPA + j] = upd[x][a];
          end
      end
      @(negedge clk) wr_en = 0;
      for (int j = 0; j < CPA; j++) begin
        step = SW'(j);
        #1;
        for (int x = 0; x < NX; x++)
          for (int a = 0; a < ADCS; a++) begin
            checks++;
            if (cur[x][a] !== ref_mem[x][a * CPA + j]) failures++;
          end
      end
      for (int x = 0; x < NX; x++)
        for (int c = 0; c < COLS; c++) begin
          rd_en = 1; rd_xbar = XW'(x); rd_col = CAW'(c);
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (rd_data !== ref_mem[x][c]) begin
            failures++;
            if (failures < 10) $display("FAIL read x%0d c%0d", x, c);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
