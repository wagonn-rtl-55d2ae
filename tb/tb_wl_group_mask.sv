// tb_wl_group_mask: for every mode and group, checks each row's enable against
// the definitions (PWA: row r in group r / (ROWS/G); DPWA: row r in group
// r mod G; all rows otherwise) and that PWA/DPWA assert ROWS/G rows.
module tb_wl_group_mask;
  import wagonn_pkg::*;
  localparam int ROWS = XBAR_ROWS;
  localparam int G    = WL_GROUPS;
  localparam int GW   = (G > 1) ? $clog2(G) : 1;

  wl_mode_e mode;
  logic [GW-1:0] group;
  logic [ROWS-1:0] mask;
  int checks = 0, failures = 0;

  wl_group_mask u_dut (.*);

  initial begin
    wl_mode_e modes [3] = '{WL_ALL, WL_PWA, WL_DPWA};
    foreach (modes[m]) begin
      for (int g = 0; g < G; g++) begin
        mode = modes[m]; group = GW'(g);
        #1;
        for (int r = 0; r < ROWS; r++) begin
          bit e;
          if (mode == WL_PWA)       e = (r / (ROWS / G)) == g;
          else if (mode == WL_DPWA) e = (r % G) == g;
          else                      e = 1'b1;
          checks++;
          if (mask[r] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL mode %s group %0d row %0d", mode.name(), g, r);
          end
        end
        checks++;
        if ($countones(mask) != ((mode == WL_ALL) ? ROWS : ROWS / G)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
