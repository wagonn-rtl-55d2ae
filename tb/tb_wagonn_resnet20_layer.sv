// tb_wagonn_resnet20_layer: maps 3x3 convolution layers of the ResNet-20
// CIFAR-10 shape onto the default MVMU (4 crossbars of 128x128) and checks
// one output pixel of each against a direct integer computation.
//
// Mapping (the usual crossbar mapping; the layer shapes are ResNet-20's,
// the weights are random because trained weights are not part of this
// design):
//   - the layer is an im2col matrix of K = 9*C_in rows by C_out outputs;
//   - weights are 8-bit two's complement, stored one bit per column:
//     output o, bit k -> global column o*8 + k, crossbar column/128;
//   - rows are cut into slices of 128; a slice's rows share one input vector
//     (the MVMU's input register), the last slice is padded with zero rows;
//   - each slice is deployed with WAGONN (per-crossbar tracking vectors),
//     run in DPWA mode, and its columns are combined outside the MVMU as
//     y[o] += sum_k col(o,k) * (k == 7 ? -128 : 2^k), then summed over slices.
// Layers: 3x3x16 -> 16 (first stage, 144 rows, 2 slices, 1 crossbar busy)
// and 3x3x64 -> 64 (last stage, 576 rows, 5 slices, all 4 crossbars busy).
// Inputs are unsigned 8-bit activations (after ReLU).
module tb_wagonn_resnet20_layer;
  import wagonn_pkg::*;

  localparam int ROWS = XBAR_ROWS;
  localparam int COLS = XBAR_COLS;
  localparam int NX   = NUM_XBAR;
  localparam int IB   = IN_BITS;
  localparam int WB   = 8;              // weight bits
  localparam int AW   = $clog2(ROWS);
  localparam int XW   = (NX > 1) ? $clog2(NX) : 1;
  localparam int CAW  = $clog2(COLS);
  localparam int ACC_W = ADC_BITS + IN_BITS;
  localparam int MAX_K = 9 * 64;
  localparam int MAX_O = 64;

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

  int checks = 0, failures = 0, n_slices = 0, n_xbars_used = 0;
  int          wgt [MAX_K][MAX_O];   // signed 8-bit weights
  logic [7:0]  act [MAX_K];          // unsigned activations
  bit          xw  [NX][ROWS][COLS]; // weight bits of the current slice, original row order
  int          tv  [NX][ROWS];

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int cin, int cout);
    int  k_rows = 9 * cin;
    int  n_sl   = (k_rows + ROWS - 1) / ROWS;
    int  n_col  = cout * WB;
    longint y [MAX_O];
    for (int o = 0; o < cout; o++) y[o] = 0;
    for (int r = 0; r < k_rows; r++) begin
      act[r] = 8'($urandom);
      for (int o = 0; o < cout; o++) wgt[r][o] = $urandom_range(0, 63) - 32;
    end
    for (int s = 0; s < n_sl; s++) begin
      // weight bits of this slice, original row order
      for (int x = 0; x < NX; x++)
        for (int i = 0; i < ROWS; i++)
          for (int c = 0; c < COLS; c++) begin
            int gc = x * COLS + c;
            int r  = s * ROWS + i;
            xw[x][i][c] = (r < k_rows && gc < n_col) ? 1'((wgt[r][gc / WB] >>> (gc % WB)) & 1) : 1'b0;
          end
      // tracking vectors
      for (int x = 0; x < NX; x++) begin
        int rs [ROWS];
        for (int i = 0; i < ROWS; i++) begin
          rs[i] = 0;
          for (int c = 0; c < COLS; c++) rs[i] += xw[x][i][c];
        end
        for (int i = 0; i < ROWS; i++) begin
          int rank = 0;
          for (int j = 0; j < ROWS; j++) if (rs[j] < rs[i] || (rs[j] == rs[i] && j < i)) rank++;
          tv[x][i] = rank;
        end
      end
      // deploy weights and LUTs, load inputs
      for (int x = 0; x < NX; x++)
        for (int i = 0; i < ROWS; i++) begin
          @(negedge clk);
          w_wr_en = 1; w_wr_xbar = XW'(x); w_wr_row = AW'(tv[x][i]);
          for (int c = 0; c < COLS; c++) w_wr_data[c] = xw[x][i][c];
          lut_wr_en = 1; lut_wr_xbar = XW'(x); lut_wr_row = AW'(i); lut_wr_dest = AW'(tv[x][i]);
        end
      for (int i = 0; i < ROWS; i++) begin
        @(negedge clk);
        w_wr_en = 0; lut_wr_en = 0;
        ir_wr_en = 1; ir_wr_row = AW'(i);
        ir_wr_data = (s * ROWS + i < k_rows) ? act[s * ROWS + i] : '0;
      end
      @(negedge clk);
      ir_wr_en = 0;
      // one MVM, DPWA
      start = 1; mode = WL_DPWA;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      n_slices++;
      // combine bit columns into signed outputs
      for (int gc = 0; gc < n_col; gc++) begin
        longint v;
        or_rd_en = 1; or_rd_xbar = XW'(gc / COLS); or_rd_col = CAW'(gc % COLS);
        @(negedge clk);
        or_rd_en = 0;
        v = longint'(or_rd_data);
        if (gc % WB == WB - 1) y[gc / WB] -= v << (WB - 1);
        else                   y[gc / WB] += v << (gc % WB);
      end
    end
    if ((n_col + COLS - 1) / COLS > n_xbars_used) n_xbars_used = (n_col + COLS - 1) / COLS;
    for (int o = 0; o < cout; o++) begin
      longint e = 0;
      for (int r = 0; r < k_rows; r++) e += longint'(act[r]) * wgt[r][o];
      checks++;
      if (y[o] != e) begin
        failures++;
        if (failures < 10) $display("FAIL layer %0dx%0d output %0d: got %0d expected %0d", cin, cout, o, y[o], e);
      end
    end
    $display("layer 3x3x%0d -> %0d: %0d rows in %0d slices, %0d outputs checked", cin, cout, k_rows, n_sl, cout);
  endtask

  initial begin
    rst_n = 0;
    {ir_wr_en, lut_wr_en, w_wr_en, start, or_rd_en} = '0;
    ir_wr_row = '0; ir_wr_data = '0; lut_wr_xbar = '0; lut_wr_row = '0; lut_wr_dest = '0;
    w_wr_xbar = '0; w_wr_row = '0; w_wr_data = '0; or_rd_xbar = '0; or_rd_col = '0;
    mode = WL_ALL;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(16, 16);
    run_layer(64, 64);
    checks++;
    if (n_xbars_used != NX) failures++;   // the 64-channel layer fills every crossbar
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
