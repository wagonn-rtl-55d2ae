// tb_wagonn_mvmu: end-to-end test of the WAGONN MVMU at its default size
// (4 crossbars of 128x128, 8-bit inputs, 1 ADC per crossbar, 2 word-line
// groups).
//
// For every crossbar it draws a random weight matrix whose rows have very
// different densities of 1s, computes the WAGONN tracking vector (row-sums,
// stable ascending sort, T[i] = sorted position of row i), deploys the rows at
// their sorted positions and loads T into the LUTs. Random 8-bit inputs are
// loaded in the original row order. Each MVM is run in all three word-line
// modes (all rows, PWA, DPWA) and every column result is compared with
// sum_i in[i] * W[i][c] computed here from the un-permuted matrix; the latency
// is compared with the controller's formula. It also watches the sense lines
// of crossbar 0 and checks that the largest column count seen in an
// activation cycle equals the one predicted from the deployed matrix for each
// mode, and that DPWA lowers it below PWA on agglomerated weights.
// Mechanisms counted: re-mapping, all-row cycles, PWA cycles, DPWA cycles,
// multi-cycle ADC sharing, shift-and-add over several bits.
module tb_wagonn_mvmu;
  import wagonn_pkg::*;

  localparam int ROWS = XBAR_ROWS;
  localparam int COLS = XBAR_COLS;
  localparam int NX   = NUM_XBAR;
  localparam int IB   = IN_BITS;
  localparam int G    = WL_GROUPS;
  localparam int CPA  = XBAR_COLS / ADCS_PER_XBAR;
  localparam int AW   = $clog2(ROWS);
  localparam int XW   = (NX > 1) ? $clog2(NX) : 1;
  localparam int CAW  = $clog2(COLS);
  localparam int ACC_W = ADC_BITS + IN_BITS;
  localparam int NUM_TESTS = 2;

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

  wagonn_mvmu u_dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_remap = 0, n_all_cycles = 0, n_pwa_cycles = 0, n_dpwa_cycles = 0;
  int n_adc_multi = 0, n_multibit = 0;

  bit            w    [NX][ROWS][COLS];
  int            tv   [NX][ROWS];
  logic [IB-1:0] inp  [ROWS];
  int            max_seen;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Largest sense-line count of crossbar 0 in any sampled activation cycle.
  always @(negedge clk) begin
    if (u_dut.sample) begin
      for (int c = 0; c < COLS; c++)
        if (int'(u_dut.g_xbar[0].sl[c]) > max_seen) max_seen = int'(u_dut.g_xbar[0].sl[c]);
      unique case (u_dut.wl_mode)
        WL_ALL:  n_all_cycles++;
        WL_PWA:  n_pwa_cycles++;
        default: n_dpwa_cycles++;
      endcase
    end
    if (u_dut.iru_done) n_remap++;
  end

  function automatic void check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endfunction

  function automatic void make_weights();
    for (int x = 0; x < NX; x++) begin
      for (int r = 0; r < ROWS; r++) begin
        int p = $urandom_range(0, 100);   // density of 1s in this row, percent
        for (int c = 0; c < COLS; c++) w[x][r][c] = ($urandom_range(0, 99) < p);
      end
      // tracking vector: stable ascending sort of row-sums
      for (int i = 0; i < ROWS; i++) begin
        int rs_i = 0, rank = 0;
        for (int c = 0; c < COLS; c++) rs_i += w[x][i][c];
        for (int j = 0; j < ROWS; j++) begin
          int rs_j = 0;
          for (int c = 0; c < COLS; c++) rs_j += w[x][j][c];
          if (rs_j < rs_i || (rs_j == rs_i && j < i)) rank++;
        end
        tv[x][i] = rank;
      end
    end
  endfunction

  task automatic deploy();
    for (int x = 0; x < NX; x++) begin
      for (int i = 0; i < ROWS; i++) begin
        @(negedge clk);
        w_wr_en = 1'b1; w_wr_xbar = XW'(x); w_wr_row = AW'(tv[x][i]);
        for (int c = 0; c < COLS; c++) w_wr_data[c] = w[x][i][c];
        lut_wr_en = 1'b1; lut_wr_xbar = XW'(x); lut_wr_row = AW'(i); lut_wr_dest = AW'(tv[x][i]);
      end
    end
    @(negedge clk);
    w_wr_en = 1'b0; lut_wr_en = 1'b0;
  endtask

  task automatic load_inputs();
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      ir_wr_en = 1'b1; ir_wr_row = AW'(i); ir_wr_data = IB'($urandom);
      inp[i] = ir_wr_data;
    end
    @(negedge clk);
    ir_wr_en = 1'b0;
  endtask

  // Expected largest column count of crossbar 0 over all bits and groups.
  function automatic int expected_max(wl_mode_e m);
    int best = 0;
    int ng = (m == WL_ALL) ? 1 : G;
    for (int b = 0; b < IB; b++)
      for (int g = 0; g < ng; g++)
        for (int c = 0; c < COLS; c++) begin
          int cnt = 0;
          for (int i = 0; i < ROWS; i++) begin
            int pr = tv[0][i];   // physical row of original row i
            bit on;
            if (m == WL_PWA)       on = (pr / (ROWS / G)) == g;
            else if (m == WL_DPWA) on = (pr % G) == g;
            else                   on = 1'b1;
            if (on && inp[i][b] && w[0][i][c]) cnt++;
          end
          if (cnt > best) best = cnt;
        end
    return best;
  endfunction

  task automatic run_mvm(wl_mode_e m, output int peak);
    int ng = (m == WL_ALL) ? 1 : G;
    int lat = 0;
    int exp_lat = (ROWS + 1) + IB * ng * (2 + CPA);
    max_seen = 0;
    @(negedge clk);
    start = 1'b1; mode = m;
    @(negedge clk);
    start = 1'b0;
    lat = 0;   // edges counted from the one that samples start
    while (!done && lat < 100000) begin
      @(negedge clk);
      lat++;
    end
    check($sformatf("latency mode %s", m.name()), lat, exp_lat);
    if (CPA > 1) n_adc_multi++;
    if (IB > 1) n_multibit++;
    // read every result
    for (int x = 0; x < NX; x++)
      for (int c = 0; c < COLS; c++) begin
        longint exp_v = 0;
        for (int i = 0; i < ROWS; i++) exp_v += longint'(inp[i]) * w[x][i][c];
        or_rd_en = 1'b1; or_rd_xbar = XW'(x); or_rd_col = CAW'(c);
        @(negedge clk);
        or_rd_en = 1'b0;
        check($sformatf("out[%0d][%0d] mode %s", x, c, m.name()), or_rd_data, exp_v);
      end
    peak = max_seen;
    check($sformatf("peak column count mode %s", m.name()), max_seen, expected_max(m));
  endtask

  initial begin
    int pk_all, pk_pwa, pk_dpwa;
    rst_n = 1'b0;
    {ir_wr_en, lut_wr_en, w_wr_en, start, or_rd_en} = '0;
    ir_wr_row = '0; ir_wr_data = '0; lut_wr_xbar = '0; lut_wr_row = '0; lut_wr_dest = '0;
    w_wr_xbar = '0; w_wr_row = '0; w_wr_data = '0; or_rd_xbar = '0; or_rd_col = '0;
    mode = WL_ALL;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < NUM_TESTS; t++) begin
      make_weights();
      deploy();
      load_inputs();
      run_mvm(WL_ALL, pk_all);
      run_mvm(WL_PWA, pk_pwa);
      run_mvm(WL_DPWA, pk_dpwa);
      $display("test %0d: peak column count all=%0d pwa=%0d dpwa=%0d", t, pk_all, pk_pwa, pk_dpwa);
      // Agglomerated rows make consecutive groups unbalanced; interleaving helps.
      check("DPWA peak below PWA peak", longint'(pk_dpwa < pk_pwa), 1);
    end

    $display("mechanisms: remap=%0d all_cycles=%0d pwa_cycles=%0d dpwa_cycles=%0d adc_shared=%0d multibit=%0d",
             n_remap, n_all_cycles, n_pwa_cycles, n_dpwa_cycles, n_adc_multi, n_multibit);
    check("remap happened",        longint'(n_remap > 0), 1);
    check("all-row cycles",        longint'(n_all_cycles > 0), 1);
    check("PWA cycles",            longint'(n_pwa_cycles > 0), 1);
    check("DPWA cycles",           longint'(n_dpwa_cycles > 0), 1);
    check("ADC column sharing",    longint'(n_adc_multi > 0), 1);
    check("multi-bit shift-add",   longint'(n_multibit > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
