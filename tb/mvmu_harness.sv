// mvmu_harness: reusable self-checking harness around one wagonn_mvmu of any
// size. It runs its own clock and performs NUM_TESTS rounds of: random weight
// rows of varied density, tracking-vector computation (row-sums, stable
// ascending sort), re-mapped deployment, random inputs, and one MVM in each of
// the three word-line modes. Every column of every crossbar is compared with
// sum_i in[i] * W[i][c] of the un-permuted matrix, and the start-to-done
// latency with (ROWS+1) + IN_BITS*n*(2 + COLS/ADCS). When finished it raises
// finished and reports its check and failure counts; the instantiating
// testbench prints the result.
module mvmu_harness #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int IN_BITS   = 8,
  parameter int NUM_XBAR  = 4,
  parameter int ADCS      = 1,
  parameter int ADC_BITS  = 8,
  parameter int GROUPS    = 2,
  parameter int NUM_TESTS = 1
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  import wagonn_pkg::*;

  localparam int NX    = NUM_XBAR;
  localparam int IB    = IN_BITS;
  localparam int CPA   = COLS / ADCS;
  localparam int AW    = $clog2(ROWS);
  localparam int XW    = (NX > 1) ? $clog2(NX) : 1;
  localparam int CAW   = $clog2(COLS);
  localparam int ACC_W = ADC_BITS + IN_BITS;

  logic clk = 1'b0;
  logic rst_n;
  logic ir_wr_en, lut_wr_en, w_wr_en, start, busy, done, or_rd_en;
  logic [AW-1:0] ir_wr_row, lut_wr_row, lut_wr_dest, w_wr_row;
  logic [IB-1:0] ir_wr_data;
  logic [XW-1:0] lut_wr_xbar, w_wr_xbar, or_rd_xbar;
  logic [COLS-1:0] w_wr_data;
  logic [CAW-1:0] or_rd_col;
  logic [ACC_W-1:0] or_rd_data;
  wl_mode_e mode;

  wagonn_mvmu #(.ROWS(ROWS), .COLS(COLS), .IN_BITS(IN_BITS), .NUM_XBAR(NUM_XBAR),
                .ADCS(ADCS), .ADC_BITS(ADC_BITS), .GROUPS(GROUPS)) u_dut (.*);

  always #5 clk = ~clk;

  bit            w   [NX][ROWS][COLS];
  int            tv  [NX][ROWS];
  logic [IB-1:0] inp [ROWS];

  function automatic void check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %m %s: got %0d expected %0d", what, got, exp);
    end
  endfunction

  function automatic void make_weights();
    for (int x = 0; x < NX; x++) begin
      int rs [ROWS];
      for (int r = 0; r < ROWS; r++) begin
        int p = $urandom_range(0, 100);
        rs[r] = 0;
        for (int c = 0; c < COLS; c++) begin
          w[x][r][c] = ($urandom_range(0, 99) < p);
          rs[r] += w[x][r][c];
        end
      end
      for (int i = 0; i < ROWS; i++) begin
        int rank = 0;
        for (int j = 0; j < ROWS; j++)
          if (rs[j] < rs[i] || (rs[j] == rs[i] && j < i)) rank++;
        tv[x][i] = rank;
      end
    end
  endfunction

  task automatic deploy_and_load();
    for (int x = 0; x < NX; x++)
      for (int i = 0; i < ROWS; i++) begin
        @(negedge clk);
        w_wr_en = 1'b1; w_wr_xbar = XW'(x); w_wr_row = AW'(tv[x][i]);
        for (int c = 0; c < COLS; c++) w_wr_data[c] = w[x][i][c];
        lut_wr_en = 1'b1; lut_wr_xbar = XW'(x); lut_wr_row = AW'(i); lut_wr_dest = AW'(tv[x][i]);
      end
    @(negedge clk);
    w_wr_en = 1'b0; lut_wr_en = 1'b0;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      ir_wr_en = 1'b1; ir_wr_row = AW'(i); ir_wr_data = IB'($urandom);
      inp[i] = ir_wr_data;
    end
    @(negedge clk);
    ir_wr_en = 1'b0;
  endtask

  task automatic run_mvm(wl_mode_e m);
    int ng = (m == WL_ALL) ? 1 : GROUPS;
    int lat = 0;
    @(negedge clk);
    start = 1'b1; mode = m;
    @(negedge clk);
    start = 1'b0;
    while (!done && lat < 1000000) begin
      @(negedge clk);
      lat++;
    end
    check($sformatf("latency %s", m.name()), lat, (ROWS + 1) + IB * ng * (2 + CPA));
    for (int x = 0; x < NX; x++)
      for (int c = 0; c < COLS; c++) begin
        longint e = 0;
        for (int i = 0; i < ROWS; i++) e += longint'(inp[i]) * w[x][i][c];
        or_rd_en = 1'b1; or_rd_xbar = XW'(x); or_rd_col = CAW'(c);
        @(negedge clk);
        or_rd_en = 1'b0;
        check($sformatf("out[%0d][%0d] %s", x, c, m.name()), or_rd_data, e);
      end
  endtask

  initial begin
    finished = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0;
    {ir_wr_en, lut_wr_en, w_wr_en, start, or_rd_en} = '0;
    ir_wr_row = '0; ir_wr_data = '0; lut_wr_xbar = '0; lut_wr_row = '0; lut_wr_dest = '0;
    w_wr_xbar = '0; w_wr_row = '0; w_wr_data = '0; or_rd_xbar = '0; or_rd_col = '0;
    mode = WL_ALL;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NUM_TESTS; t++) begin
      make_weights();
      deploy_and_load();
      run_mvm(WL_ALL);
      run_mvm(WL_PWA);
      run_mvm(WL_DPWA);
    end
    finished = 1'b1;
  end
endmodule
