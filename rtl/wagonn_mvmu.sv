// wagonn_mvmu: a matrix-vector-multiply unit (MVMU) with WAGONN weight-bit
// agglomeration; the top of this design.
//
// Structure (left to right): input register -> Input Re-mapping Unit (one LUT
// and one re-mapped register per crossbar) -> word-line group mask -> NUM_XBAR
// crossbars -> per-crossbar sample-and-hold and ADC(s) -> shift-and-add per ADC
// lane -> output register, sequenced by mvmu_controller.
//
// Use:
//   1. Deploy weights: for each crossbar x, write weight row i of the layer
//      into crossbar row T_x[i] (w_wr_*), and load T_x into LUT x (lut_wr_*).
//      T_x is the tracking vector: rows sorted by row-sum, ascending, T_x[i]
//      the sorted position of row i, so the heaviest rows are at the bottom,
//      next to the ADC.
//   2. Load the input activations into the input register (ir_wr_*), one per
//      row, in the layer's original row order.
//   3. Pulse start with mode = WL_ALL, WL_PWA or WL_DPWA. The IRU applies the
//      same permutation to the inputs, so the products are those of the
//      un-permuted layer.
//   4. When done pulses, read out[x][c] = sum_i in[i] * W_x[i][c] with or_rd_*
//      (one-cycle latency).
// Timing: see mvmu_controller. With the defaults, done rises 2209 cycles
// (WL_PWA, WL_DPWA) or 1169 cycles (WL_ALL) after the clock edge that samples
// start.
// Do not write the LUTs, weights or input register while busy.
module wagonn_mvmu #(
  parameter int unsigned ROWS     = wagonn_pkg::XBAR_ROWS,
  parameter int unsigned COLS     = wagonn_pkg::XBAR_COLS,
  parameter int unsigned IN_BITS  = wagonn_pkg::IN_BITS,
  parameter int unsigned NUM_XBAR = wagonn_pkg::NUM_XBAR,
  parameter int unsigned ADCS     = wagonn_pkg::ADCS_PER_XBAR,
  parameter int unsigned ADC_BITS = wagonn_pkg::ADC_BITS,
  parameter int unsigned GROUPS   = wagonn_pkg::WL_GROUPS,
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned XW      = (NUM_XBAR > 1) ? $clog2(NUM_XBAR) : 1,
  localparam int unsigned CAW     = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned ACC_W   = ADC_BITS + IN_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input register load
  input  logic                 ir_wr_en,
  input  logic [AW-1:0]        ir_wr_row,
  input  logic [IN_BITS-1:0]   ir_wr_data,
  // tracking-vector load
  input  logic                 lut_wr_en,
  input  logic [XW-1:0]        lut_wr_xbar,
  input  logic [AW-1:0]        lut_wr_row,
  input  logic [AW-1:0]        lut_wr_dest,
  // weight deployment (already re-mapped rows)
  input  logic                 w_wr_en,
  input  logic [XW-1:0]        w_wr_xbar,
  input  logic [AW-1:0]        w_wr_row,
  input  logic [COLS-1:0]      w_wr_data,
  // operation
  input  logic                 start,
  input  wagonn_pkg::wl_mode_e mode,
  output logic                 busy,
  output logic                 done,
  // result read
  input  logic                 or_rd_en,
  input  logic [XW-1:0]        or_rd_xbar,
  input  logic [CAW-1:0]       or_rd_col,
  output logic [ACC_W-1:0]     or_rd_data
);
  import wagonn_pkg::*;

  localparam int unsigned BW  = (IN_BITS > 1) ? $clog2(IN_BITS) : 1;
  localparam int unsigned GW  = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned VW  = $clog2(ROWS + 1);
  localparam int unsigned CPA = COLS / ADCS;
  localparam int unsigned SW  = (CPA > 1) ? $clog2(CPA) : 1;

  // controller <-> datapath
  logic          iru_start, iru_done, iru_busy;
  logic          ir_rd_en;
  logic [AW-1:0] ir_rd_row;
  logic [IN_BITS-1:0] ir_rd_data;
  logic          plane_rd_en;
  logic [BW-1:0] plane_bit;
  logic [ROWS-1:0] plane [NUM_XBAR];
  wl_mode_e      wl_mode;
  logic [GW-1:0] wl_group;
  logic [ROWS-1:0] wl_mask;
  logic          sample, adc_start, acc_en, acc_clear;
  logic          adc_valid [NUM_XBAR];
  logic          adc_last  [NUM_XBAR];
  logic [SW-1:0] adc_step  [NUM_XBAR];
  logic [ADC_BITS-1:0] code [NUM_XBAR][ADCS];
  logic [ACC_W-1:0] acc_cur [NUM_XBAR][ADCS];
  logic [ACC_W-1:0] acc_upd [NUM_XBAR][ADCS];

  input_register #(.ROWS(ROWS), .IN_BITS(IN_BITS)) u_ir (
    .clk(clk), .wr_en(ir_wr_en), .wr_row(ir_wr_row), .wr_data(ir_wr_data),
    .rd_en(ir_rd_en), .rd_row(ir_rd_row), .rd_data(ir_rd_data)
  );

  input_remapping_unit #(.NUM_XBAR(NUM_XBAR), .ROWS(ROWS), .IN_BITS(IN_BITS)) u_iru (
    .clk(clk), .rst_n(rst_n),
    .start(iru_start), .busy(iru_busy), .done(iru_done),
    .ir_rd_en(ir_rd_en), .ir_rd_row(ir_rd_row), .ir_rd_data(ir_rd_data),
    .lut_wr_en(lut_wr_en), .lut_wr_xbar(lut_wr_xbar),
    .lut_wr_row(lut_wr_row), .lut_wr_dest(lut_wr_dest),
    .plane_rd_en(plane_rd_en), .plane_rd_bit(plane_bit), .plane(plane)
  );

  mvmu_controller #(.IN_BITS(IN_BITS), .GROUPS(GROUPS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .mode(mode),
    .busy(busy), .done(done),
    .iru_start(iru_start), .iru_done(iru_done),
    .plane_rd_en(plane_rd_en), .plane_bit(plane_bit),
    .wl_mode(wl_mode), .wl_group(wl_group),
    .sample(sample), .adc_start(adc_start),
    .adc_valid(adc_valid[0]), .adc_last(adc_last[0]),
    .acc_en(acc_en), .acc_clear(acc_clear)
  );

  wl_group_mask #(.ROWS(ROWS), .GROUPS(GROUPS)) u_mask (
    .mode(wl_mode), .group(wl_group), .mask(wl_mask)
  );

  for (genvar x = 0; x < NUM_XBAR; x++) begin : g_xbar
    logic [VW-1:0] sl   [COLS];
    logic [VW-1:0] held [COLS];

    crossbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
      .clk(clk),
      .w_wr_en(w_wr_en && (w_wr_xbar == XW'(x))),
      .w_wr_row(w_wr_row), .w_wr_data(w_wr_data),
      .wl(plane[x] & wl_mask), .sl(sl)
    );

    sample_hold #(.COLS(COLS), .VW(VW)) u_sh (
      .clk(clk), .sample(sample), .sl(sl), .held(held)
    );

    adc #(.COLS(COLS), .ADCS(ADCS), .VW(VW), .ADC_BITS(ADC_BITS)) u_adc (
      .clk(clk), .rst_n(rst_n), .start(adc_start), .held(held),
      .out_valid(adc_valid[x]), .out_last(adc_last[x]),
      .out_step(adc_step[x]), .code(code[x])
    );

    for (genvar a = 0; a < ADCS; a++) begin : g_lane
      shift_add #(.ADC_BITS(ADC_BITS), .IN_BITS(IN_BITS), .ACC_W(ACC_W)) u_sa (
        .code(code[x][a]), .bit_pos(plane_bit), .clear(acc_clear),
        .acc_in(acc_cur[x][a]), .acc_out(acc_upd[x][a])
      );
    end
  end

  output_register #(.NUM_XBAR(NUM_XBAR), .COLS(COLS), .ADCS(ADCS), .ACC_W(ACC_W)) u_or (
    .clk(clk), .step(adc_step[0]), .cur(acc_cur),
    .wr_en(acc_en), .upd(acc_upd),
    .rd_en(or_rd_en), .rd_xbar(or_rd_xbar), .rd_col(or_rd_col), .rd_data(or_rd_data)
  );

  // All ADCs run in lock step; the controller follows ADC 0.
  for (genvar x = 1; x < NUM_XBAR; x++) begin : g_lockstep
    a_adc_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
      adc_valid[x] == adc_valid[0] && adc_step[x] == adc_step[0]);
  end

  a_iru_within_op : assert property (@(posedge clk) disable iff (!rst_n)
    iru_busy |-> busy);

  a_no_load_while_busy : assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(ir_wr_en || lut_wr_en || w_wr_en));

endmodule
