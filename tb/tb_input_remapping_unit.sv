// tb_input_remapping_unit: the IRU at its default size (4 crossbars, 128 rows,
// 8-bit inputs) fed by a reference input register with one-cycle read latency.
// Each crossbar gets its own random permutation in its LUT. After start it
// checks that the row index walks 0..ROWS-1 in consecutive cycles, that done
// rises ROWS+1 edges after the start edge (ROWS read/write cycles plus one
// pipeline cycle), and then reads every bit plane and checks
// plane[x][T_x[i]][b] == in[i][b] for every row. Repeats with new inputs and
// new permutations; a start given while busy must be ignored.
module tb_input_remapping_unit;
  localparam int NX   = wagonn_pkg::NUM_XBAR;
  localparam int ROWS = wagonn_pkg::XBAR_ROWS;
  localparam int IB   = wagonn_pkg::IN_BITS;
  localparam int AW   = $clog2(ROWS);
  localparam int XW   = (NX > 1) ? $clog2(NX) : 1;
  localparam int BW   = $clog2(IB);

  logic clk = 1'b0, rst_n;
  logic start, busy, done;
  logic ir_rd_en;
  logic [AW-1:0] ir_rd_row;
  logic [IB-1:0] ir_rd_data;
  logic lut_wr_en;
  logic [XW-1:0] lut_wr_xbar;
  logic [AW-1:0] lut_wr_row, lut_wr_dest;
  logic plane_rd_en;
  logic [BW-1:0] plane_rd_bit;
  logic [ROWS-1:0] plane [NX];

  logic [IB-1:0] inp [ROWS];
  int tv [NX][ROWS];
  int checks = 0, failures = 0;

  input_remapping_unit u_dut (.*);
  always #5 clk = ~clk;

  // reference input register: one-cycle read latency
  always_ff @(posedge clk) if (ir_rd_en) ir_rd_data <= inp[ir_rd_row];

  initial begin
    repeat (200000) @(posedge clk);
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
    rst_n = 0; start = 0; lut_wr_en = 0; plane_rd_en = 0;
    lut_wr_xbar = '0; lut_wr_row = '0; lut_wr_dest = '0; plane_rd_bit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      int lat, n_rows;
      // new tracking vectors and inputs
      for (int x = 0; x < NX; x++) begin
        for (int i = 0; i < ROWS; i++) tv[x][i] = i;
        for (int i = ROWS - 1; i > 0; i--) begin
          automatic int j = $urandom_range(0, i);
          automatic int t = tv[x][i]; tv[x][i] = tv[x][j]; tv[x][j] = t;
        end
        for (int i = 0; i < ROWS; i++) begin
          @(negedge clk);
          lut_wr_en = 1; lut_wr_xbar = XW'(x); lut_wr_row = AW'(i); lut_wr_dest = AW'(tv[x][i]);
        end
      end
      @(negedge clk) lut_wr_en = 0;
      for (int i = 0; i < ROWS; i++) inp[i] = IB'($urandom);

      start = 1;
      @(negedge clk);
      start = 0;
      lat = 0; n_rows = 0;
      while (!done && lat < 10 * ROWS) begin
        if (ir_rd_en) begin
          chk(int'(ir_rd_row) == n_rows, "row index walks 0..ROWS-1");
          n_rows++;
        end
        if (lat == 5) start = 1;          // ignored while busy
        @(negedge clk);
        start = 0;
        lat++;
      end
      chk(n_rows == ROWS, "one row read per cycle, ROWS rows");
      chk(lat == ROWS, $sformatf("done %0d edges after start (exp %0d)", lat + 1, ROWS + 1));
      @(negedge clk);
      chk(!busy, "idle after done");
      for (int b = 0; b < IB; b++) begin
        plane_rd_en = 1; plane_rd_bit = BW'(b);
        @(negedge clk);
        plane_rd_en = 0;
        for (int x = 0; x < NX; x++)
          for (int i = 0; i < ROWS; i++)
            chk(plane[x][tv[x][i]] == inp[i][b], $sformatf("plane x%0d b%0d row %0d", x, b, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
