// tb_mvmu_controller: drives the controller with reference models of the IRU
// (done ROWS+1 edges after iru_start) and of the ADC (valid for CPA cycles
// after adc_start, last on the final one; CPA = 5 here to keep it short). For
// each mode it checks the order of (bit, group) pairs at the sample pulses
// (LSB first, groups inner), that the plane read precedes each sample by one
// cycle, that acc_clear is set only in the first activation cycle, the number
// of accumulate cycles, the latency and the one-cycle done pulse.
module tb_mvmu_controller;
  import wagonn_pkg::*;
  localparam int IB   = IN_BITS;
  localparam int G    = WL_GROUPS;
  localparam int ROWS = XBAR_ROWS;
  localparam int CPA  = 5;
  localparam int BW   = $clog2(IB);
  localparam int GW   = (G > 1) ? $clog2(G) : 1;

  logic clk = 1'b0, rst_n;
  logic start, busy, done, iru_start, iru_done, plane_rd_en;
  logic [BW-1:0] plane_bit;
  wl_mode_e mode, wl_mode;
  logic [GW-1:0] wl_group;
  logic sample, adc_start, adc_valid, adc_last, acc_en, acc_clear;
  int checks = 0, failures = 0;

  mvmu_controller u_dut (.*);
  always #5 clk = ~clk;

  // IRU model
  int iru_cnt;
  logic iru_run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin iru_run <= 0; iru_cnt <= 0; end
    else if (iru_start) begin iru_run <= 1; iru_cnt <= 0; end
    else if (iru_run) begin
      iru_cnt <= iru_cnt + 1;
      if (iru_cnt == ROWS) iru_run <= 0;
    end
  end
  assign iru_done = iru_run && (iru_cnt == ROWS);

  // ADC model
  int adc_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin adc_valid <= 0; adc_cnt <= 0; end
    else if (adc_start) begin adc_valid <= 1; adc_cnt <= 0; end
    else if (adc_valid) begin
      if (adc_cnt == CPA - 1) adc_valid <= 0;
      else adc_cnt <= adc_cnt + 1;
    end
  end
  assign adc_last = adc_valid && (adc_cnt == CPA - 1);

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

  task automatic run(wl_mode_e m);
    int ng = (m == WL_ALL) ? 1 : G;
    int k = 0, n_acc = 0, n_clear = 0, lat = 0, n_done = 0;
    bit prev_plane = 0;
    @(negedge clk);
    start = 1; mode = m;
    @(negedge clk);
    start = 0; mode = WL_ALL;     // mode is sampled with start only
    while (!done && lat < 100000) begin
      if (sample) begin
        chk(prev_plane, "plane read one cycle before sample");
        chk(int'(plane_bit) == k / ng && int'(wl_group) == k % ng,
            $sformatf("order: activation %0d got bit %0d group %0d", k, plane_bit, wl_group));
        chk(adc_start, "ADC started with sample");
        chk(wl_mode == m, "mode held");
        k++;
      end
      if (acc_en) begin
        n_acc++;
        if (acc_clear) n_clear++;
      end
      prev_plane = plane_rd_en;
      @(negedge clk);
      lat++;
    end
    chk(k == IB * ng, "activation cycles");
    chk(n_acc == IB * ng * CPA, "accumulate cycles");
    chk(n_clear == CPA, "clear only in first activation cycle");
    chk(lat == (ROWS + 1) + IB * ng * (2 + CPA), $sformatf("latency %0d", lat));
    while (done) begin n_done++; @(negedge clk); end
    chk(n_done == 1, "done is one cycle");
    chk(!busy, "idle after done");
  endtask

  initial begin
    rst_n = 0; start = 0; mode = WL_ALL;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(WL_ALL);
    run(WL_PWA);
    run(WL_DPWA);
    run(WL_PWA);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
