// tb_crossbar: writes a random weight matrix into the crossbar model, applies
// random word-line patterns (dense, sparse, all-ones, all-zeros) and checks
// every sense line against the count of rows where both the input bit and the
// weight bit are 1. Rewrites some rows and checks again.
module tb_crossbar;
  localparam int ROWS = wagonn_pkg::XBAR_ROWS;
  localparam int COLS = wagonn_pkg::XBAR_COLS;
  localparam int AW   = $clog2(ROWS);
  localparam int CW   = $clog2(ROWS + 1);

  logic clk = 1'b0;
  logic w_wr_en;
  logic [AW-1:0] w_wr_row;
  logic [COLS-1:0] w_wr_data;
  logic [ROWS-1:0] wl;
  logic [CW-1:0] sl [COLS];
  bit w [ROWS][COLS];
  int checks = 0, failures = 0;

  crossbar u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(int r);
    @(negedge clk);
    w_wr_en = 1; w_wr_row = AW'(r);
    for (int c = 0; c < COLS; c++) begin
      w[r][c] = ($urandom_range(0, 99) < 40);
      w_wr_data[c] = w[r][c];
    end
    @(negedge clk) w_wr_en = 0;
  endtask

  task automatic check_all();
    #1;
    for (int c = 0; c < COLS; c++) begin
      int e = 0;
      for (int r = 0; r < ROWS; r++) e += (wl[r] & w[r][c]);
      checks++;
      if (int'(sl[c]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL col %0d got %0d exp %0d", c, sl[c], e);
      end
    end
  endtask

  initial begin
    w_wr_en = 0; w_wr_row = '0; w_wr_data = '0; wl = '0;
    for (int r = 0; r < ROWS; r++) write_row(r);
    wl = '1;  check_all();
    wl = '0;  check_all();
    for (int k = 0; k < 20; k++) begin
      for (int r = 0; r < ROWS; r++) wl[r] = ($urandom_range(0, 99) < (k * 5));
      check_all();
    end
    for (int k = 0; k < 10; k++) write_row($urandom_range(0, ROWS - 1));
    for (int k = 0; k < 5; k++) begin
      for (int r = 0; r < ROWS; r++) wl[r] = $urandom_range(0, 1);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
