// wl_group_mask: word-line enable mask for one activation cycle.
//
// With partial word-line activation only a subset of rows is asserted per
// cycle and the MVM is split into G cycles (G = GROUPS). Two groupings:
//   WL_PWA  (standard PWA): group g is the consecutive block of rows
//           g*ROWS/G .. (g+1)*ROWS/G-1.
//   WL_DPWA (distributed PWA, proposed with WAGONN): group g is every G-th row,
//           rows g, g+G, g+2G, ... Because WAGONN gathers the high row-sum rows
//           at the bottom, interleaving spreads them over all groups.
//   WL_ALL  all rows in a single cycle (group index ignored).
// Both schemes assert ROWS/G rows per cycle (paper: 64 of 128). The output is
// combinational. Rows are numbered 0 (top, far from the ADC) to ROWS-1
// (bottom, next to the ADC).
module wl_group_mask #(
  parameter int unsigned ROWS   = wagonn_pkg::XBAR_ROWS,
  parameter int unsigned GROUPS = wagonn_pkg::WL_GROUPS,
  localparam int unsigned GW    = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  wagonn_pkg::wl_mode_e mode,
  input  logic [GW-1:0]        group,
  output logic [ROWS-1:0]      mask
);
  import wagonn_pkg::*;

  localparam int unsigned PER_GROUP = ROWS / GROUPS;

  initial begin
    assert (ROWS % GROUPS == 0) else $error("ROWS must be a multiple of GROUPS");
  end

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      unique case (mode)
        WL_PWA:  mask[r] = ((r / PER_GROUP) == int'(group));
        WL_DPWA: mask[r] = ((r % GROUPS) == int'(group));
        default: mask[r] = 1'b1;
      endcase
    end
  end

endmodule
