// tb_control_unit: checks the control sequences cycle by cycle.
// Programming: a 7-cycle (35 ns) pulse with mode PROG, SE low and the
// requested column/row/level, then a 7-cycle spacer. Inference: for every
// clause 2 settle cycles, 4 SE cycles (20 ns) with one count strobe on the
// last, 1 Dis cycle (5 ns), clauses in order, then one result-load cycle.
`timescale 1ns/1ps
module tb_control_unit;
  import imbue_pkg::*;
  localparam int NCL = 12, PARTS = 2, W = 32;

  logic        clk = 1'b0, rst_n;
  logic        prog_valid, prog_ready, prog_include, infer_valid, infer_ready;
  logic [3:0]  prog_clause, sel_clause;
  logic [0:0]  prog_part, sel_part;
  logic [4:0]  prog_row, sel_row;
  mode_t       mode;
  line_drive_t prog_kind;
  logic        se, dis, lit_load, cnt_clr, cnt_en, res_clr, res_load;
  int          checks = 0, failures = 0;

  control_unit #(.NCLAUSES(NCL), .PARTS(PARTS), .W(W)) dut (.*);

  always #2.5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; prog_valid = 1'b0; infer_valid = 1'b0;
    prog_clause = '0; prog_part = '0; prog_row = '0; prog_include = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // two programming requests: include and exclude
    for (int r = 0; r < 2; r++) begin
      @(negedge clk);
      chk(prog_ready, "prog_ready in idle");
      prog_valid = 1'b1; prog_clause = 4'(5 + r); prog_part = 1'(r); prog_row = 5'(17 + r);
      prog_include = (r == 0);
      infer_valid = 1'b1;   // programming must win
      #1 chk(!infer_ready && !lit_load, "program has priority");
      @(negedge clk);
      prog_valid = 1'b0; infer_valid = 1'b0;
      for (int c = 0; c < 7; c++) begin
        chk(mode == MODE_PROG && !se && !dis, "pulse: mode PROG, SE low");
        chk(sel_clause == 4'(5 + r) && sel_part == 1'(r) && sel_row == 5'(17 + r), "pulse address");
        chk(prog_kind == (r == 0 ? LD_SET : LD_RESET), "pulse level");
        @(negedge clk);
      end
      for (int c = 0; c < 7; c++) begin
        chk(mode == MODE_IDLE && !prog_ready, "spacer");
        @(negedge clk);
      end
      chk(prog_ready, "back to idle after spacer");
    end
    // inference
    @(negedge clk);
    infer_valid = 1'b1; #1;
    chk(infer_ready && lit_load && cnt_clr && res_clr, "inference accepted");
    @(negedge clk);
    infer_valid = 1'b0;
    for (int n = 0; n < NCL; n++) begin
      for (int c = 0; c < 7; c++) begin
        chk(mode == MODE_READ && sel_clause == 4'(n), "read mode and clause order");
        chk(se == (c >= 2 && c <= 5), "SE window 20 ns");
        chk(dis == (c == 6), "Dis 5 ns");
        chk(cnt_en == (c == 5), "count on last SE cycle");
        chk(!res_load, "no early result");
        @(negedge clk);
      end
    end
    chk(res_load && mode == MODE_IDLE, "result load after last clause");
    @(negedge clk);
    chk(infer_ready && !res_load, "idle after inference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
