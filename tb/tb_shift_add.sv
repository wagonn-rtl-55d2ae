// tb_shift_add: random codes, bit positions and running totals; checks
// acc_out = (clear ? 0 : acc_in) + code * 2^bit_pos, and that a full
// LSB-first accumulation over all input bits rebuilds sum_b code_b * 2^b.
module tb_shift_add;
  localparam int AB  = wagonn_pkg::ADC_BITS;
  localparam int IB  = wagonn_pkg::IN_BITS;
  localparam int ACC = AB + IB;
  localparam int BW  = $clog2(IB);

  logic [AB-1:0] code;
  logic [BW-1:0] bit_pos;
  logic clear;
  logic [ACC-1:0] acc_in, acc_out;
  int checks = 0, failures = 0;

  shift_add u_dut (.*);

  initial begin
    for (int k = 0; k < 2000; k++) begin
      longint e;
      code = AB'($urandom); bit_pos = BW'($urandom); clear = 1'($urandom);
      acc_in = ACC'($urandom_range(0, (1 << (ACC - 1)) - 1));
      #1;
      e = (clear ? 0 : longint'(acc_in)) + (longint'(code) << bit_pos);
      e = e % (longint'(1) << ACC);
      checks++;
      if (longint'(acc_out) != e) begin
        failures++;
        if (failures < 10) $display("FAIL code %0d bit %0d clr %0d in %0d got %0d exp %0d",
                                    code, bit_pos, clear, acc_in, acc_out, e);
      end
    end
    for (int k = 0; k < 200; k++) begin
      automatic logic [ACC-1:0] acc = '0;
      automatic longint e = 0;
      for (int b = 0; b < IB; b++) begin
        code = AB'($urandom_range(0, wagonn_pkg::XBAR_ROWS)); bit_pos = BW'(b);
        clear = (b == 0); acc_in = acc;
        #1;
        acc = acc_out;
        e += longint'(code) << b;
      end
      checks++;
      if (longint'(acc) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
