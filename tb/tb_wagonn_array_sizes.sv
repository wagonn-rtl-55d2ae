// tb_wagonn_array_sizes: runs the MVMU in the other array configurations the
// WAGONN evaluation covers, each through mvmu_harness:
//   - 64x64 arrays (the smaller SRAM array size),
//   - 256x256 arrays (the largest FeFET array size; 9-bit ADC so that counts
//     up to 256 are exact),
//   - 128x128 arrays with 16 ADCs per crossbar (8 columns per ADC).
// In each, all three word-line modes (all rows, PWA and DPWA with two groups)
// are checked against the un-permuted product, with the latency formula.
module tb_wagonn_array_sizes;
  logic f64, f256, f16;
  int c64, c256, c16, e64, e256, e16;

  mvmu_harness #(.ROWS(64),  .COLS(64),  .NUM_XBAR(2), .ADC_BITS(7)) u_64x64
    (.finished(f64), .checks(c64), .failures(e64));
  mvmu_harness #(.ROWS(256), .COLS(256), .NUM_XBAR(2), .ADC_BITS(9)) u_256x256
    (.finished(f256), .checks(c256), .failures(e256));
  mvmu_harness #(.ROWS(128), .COLS(128), .NUM_XBAR(2), .ADCS(16)) u_adc16
    (.finished(f16), .checks(c16), .failures(e16));

  initial begin
    int checks, failures;
    #1;   // let the harnesses clear their flags
    fork
      wait (f64 && f256 && f16);
      #50ms;
    join_any
    checks   = c64 + c256 + c16;
    failures = e64 + e256 + e16;
    if (!(f64 && f256 && f16)) begin
      failures++;
      $display("watchdog expired");
    end
    $display("64x64: %0d checks, 256x256: %0d checks, 16 ADCs: %0d checks", c64, c256, c16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
