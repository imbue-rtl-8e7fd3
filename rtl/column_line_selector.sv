// column_line_selector: drives the column lines of the crossbar.
//
// Column numbering is clause * PARTS + part, so the PARTS partial-clause
// columns of a clause sit side by side. In MODE_READ every column of the
// selected clause is activated, so the whole clause is sensed in one read
// pulse. In MODE_PROG only the single column (clause, part) that holds the TA
// being programmed is activated. In MODE_IDLE all columns are off.
// Purely combinational; col_sel follows the inputs in the same cycle.
`timescale 1ns/1ps
module column_line_selector
  import imbue_pkg::*;
#(
  parameter int unsigned NCLAUSES = M_DEF * CPC_DEF,
  parameter int unsigned PARTS    = PARTS_DEF,
  localparam int unsigned CW = (NCLAUSES > 1) ? $clog2(NCLAUSES) : 1,
  localparam int unsigned PW = (PARTS > 1) ? $clog2(PARTS) : 1
) (
  input  mode_t                      mode,
  input  logic [CW-1:0]              clause,
  input  logic [PW-1:0]              part,
  output logic [NCLAUSES*PARTS-1:0]  col_sel
);

  always_comb begin
    col_sel = '0;
    for (int c = 0; c < NCLAUSES; c++) begin
      for (int p = 0; p < PARTS; p++) begin
        if (c == int'(clause)) begin
          if (mode == MODE_READ)                          col_sel[c*PARTS+p] = 1'b1;
          else if (mode == MODE_PROG && p == int'(part))  col_sel[c*PARTS+p] = 1'b1;
        end
      end
    end
  end

endmodule
