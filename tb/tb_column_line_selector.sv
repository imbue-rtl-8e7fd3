// tb_column_line_selector: exhaustive check over mode, clause and part of the
// column enables (read: both columns of the clause; program: one column;
// idle: none).
`timescale 1ns/1ps
module tb_column_line_selector;
  import imbue_pkg::*;
  localparam int NCL = 12, PARTS = 2;

  mode_t            mode;
  logic [3:0]       clause;
  logic [0:0]       part;
  logic [NCL*PARTS-1:0] col_sel;
  int               checks = 0, failures = 0;

  column_line_selector #(.NCLAUSES(NCL), .PARTS(PARTS)) dut (.mode, .clause, .part, .col_sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode_t modes [3] = '{MODE_IDLE, MODE_READ, MODE_PROG};
    foreach (modes[mi])
      for (int c = 0; c < NCL; c++)
        for (int p = 0; p < PARTS; p++) begin
          logic [NCL*PARTS-1:0] e;
          mode = modes[mi]; clause = 4'(c); part = 1'(p); #1;
          e = '0;
          if (mode == MODE_READ) for (int q = 0; q < PARTS; q++) e[c*PARTS+q] = 1'b1;
          if (mode == MODE_PROG) e[c*PARTS+p] = 1'b1;
          checks++;
          if (col_sel !== e) begin
            failures++;
            $display("FAIL mode=%s c=%0d p=%0d got %b exp %b", mode.name(), c, p, col_sel, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
