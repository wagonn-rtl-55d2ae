// mvmu_controller: sequences one matrix-vector multiplication in the WAGONN
// MVMU.
//
// Sequence after start (one-cycle pulse, mode sampled with it):
//   REMAP  start the IRU and wait for its done: every crossbar's inputs are
//          copied into its re-mapped register in tracking-vector order.
//   then for input bit b = 0 .. IN_BITS-1 (LSB first) and, within it, for
//   word-line group g = 0 .. n-1 (n = 1 for WL_ALL, GROUPS for PWA/DPWA):
//   PLANE  read bit plane b of every re-mapped register (1 cycle).
//   EVAL   the plane, masked by group g, drives the word lines; the crossbars
//          settle and the sample-and-hold captures the sense lines; the ADCs
//          are started (1 cycle).
//   CONV   the ADCs convert their columns, one per cycle; the shift-and-add
//          weights each code by 2^b and accumulates it in the output register
//          (clear on b = 0, g = 0). Lasts COLS/ADCS cycles (adc_last ends it).
//   DONE   done pulses for one cycle.
// Latency: done is high in the cycle that begins
//   (ROWS + 1) + IN_BITS * n * (2 + COLS/ADCS)
// clock edges after the edge that samples start (ROWS + 1 for re-mapping,
// 2 + COLS/ADCS per activation cycle).
// Follows the paper: re-mapping before streaming, bit-serial inputs, PWA/DPWA
// splitting each bit into n cycles, shared ADCs. This design's choice: the
// exact state sequence, LSB-first order and no overlap between conversion of
// one cycle and evaluation of the next.
module mvmu_controller #(
  parameter int unsigned IN_BITS = wagonn_pkg::IN_BITS,
  parameter int unsigned GROUPS  = wagonn_pkg::WL_GROUPS,
  localparam int unsigned BW     = (IN_BITS > 1) ? $clog2(IN_BITS) : 1,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  wagonn_pkg::wl_mode_e mode,
  output logic                 busy,
  output logic                 done,
  // IRU
  output logic                 iru_start,
  input  logic                 iru_done,
  output logic                 plane_rd_en,
  output logic [BW-1:0]        plane_bit,
  // word-line grouping
  output wagonn_pkg::wl_mode_e wl_mode,
  output logic [GW-1:0]        wl_group,
  // sample-and-hold and ADC
  output logic                 sample,
  output logic                 adc_start,
  input  logic                 adc_valid,
  input  logic                 adc_last,
  // shift-and-add / output register
  output logic                 acc_en,
  output logic                 acc_clear
);
  import wagonn_pkg::*;

  typedef enum logic [2:0] {
    S_IDLE, S_REMAP, S_PLANE, S_EVAL, S_CONV, S_DONE
  } state_e;

  state_e        state;
  wl_mode_e      mode_q;
  logic [BW-1:0] bit_q;
  logic [GW-1:0] grp_q;
  logic [GW-1:0] last_grp;

  assign last_grp = (mode_q == WL_ALL) ? '0 : GW'(GROUPS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode_q <= WL_ALL;
      bit_q  <= '0;
      grp_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_REMAP;
          mode_q <= mode;
        end
        S_REMAP: if (iru_done) begin
          state <= S_PLANE;
          bit_q <= '0;
          grp_q <= '0;
        end
        S_PLANE: state <= S_EVAL;
        S_EVAL:  state <= S_CONV;
        S_CONV: if (adc_last) begin
          if (grp_q != last_grp) begin
            grp_q <= grp_q + 1'b1;
            state <= S_PLANE;
          end else if (bit_q != BW'(IN_BITS - 1)) begin
            grp_q <= '0;
            bit_q <= bit_q + 1'b1;
            state <= S_PLANE;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy        = (state != S_IDLE);
    done        = (state == S_DONE);
    iru_start   = (state == S_IDLE) && start;
    plane_rd_en = (state == S_PLANE);
    plane_bit   = bit_q;
    wl_mode     = mode_q;
    wl_group    = grp_q;
    sample      = (state == S_EVAL);
    adc_start   = (state == S_EVAL);
    acc_en      = (state == S_CONV) && adc_valid;
    acc_clear   = (bit_q == '0) && (grp_q == '0);
  end

  a_conv_has_adc : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_CONV) |-> adc_valid);

endmodule
