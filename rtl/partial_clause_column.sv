// partial_clause_column: behavioural model of one crossbar column (analog
// part, not synthesizable logic).
//
// W TA cells share one column line. Each cell sees its own row literal; the
// cell currents add on the column (Kirchhoff's current law) and flow through
// the resistor R to ground, so the column voltage is
//   Col_line = R * sum(i_cell)
// reported in microvolts (nA * Ohm / 1000). With the nominal currents and
// R = 100 Ohm a column of 32 excluded cells all reading literal '0' gives
// 6.05 mV, while one include reading literal '0' alone gives 7.61 mV; the CSA
// reference has to sit between these, which is what limits the column to 32
// cells. The resistor is ideal; wire resistance and sneak paths are ignored.
// `sel` is the column line from the column line selector and is shared by all
// cells of the column. The response is immediate (no RC settling).
`timescale 1ns/1ps
module partial_clause_column
  import imbue_pkg::*;
#(
  parameter int unsigned W        = W_DEF,
  parameter int unsigned R_OHM    = R_OHM_DEF,
  parameter int unsigned I_INC_NA = I_INC_NA_DEF,
  parameter int unsigned I_EXC_NA = I_EXC_NA_DEF
) (
  input  line_drive_t line [W],
  input  logic        sel,
  output int unsigned col_uv
);

  int unsigned i_cell [W];

  for (genvar i = 0; i < W; i++) begin : g_cell
    ta_cell #(.I_INC_NA(I_INC_NA), .I_EXC_NA(I_EXC_NA)) u_ta (
      .line(line[i]), .sel(sel), .i_na(i_cell[i])
    );
  end

  always_comb begin
    int unsigned sum_na;
    sum_na = 0;
    for (int i = 0; i < W; i++) sum_na += i_cell[i];
    col_uv = (sum_na * R_OHM) / 1000;
  end

endmodule
