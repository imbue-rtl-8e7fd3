// tb_ta_cell: self-checking test of the 1T1R TA cell model.
// Applies read levels with the column on and off, then programming pulses of
// full (35 ns) and short (20 ns) length in all four combinations
// (exclude->include, include->include, include->exclude, exclude->exclude),
// and a pulse with the column off, checking the read current after each.
`timescale 1ns/1ps
module tb_ta_cell;
  import imbue_pkg::*;

  line_drive_t line;
  logic        sel;
  int unsigned i_na;
  int          checks = 0, failures = 0;

  ta_cell dut (.line, .sel, .i_na);

  task automatic check_i(input int unsigned exp, input string what);
    #1;
    checks++;
    if (i_na !== exp) begin
      failures++;
      $display("FAIL %s: i_na=%0d expected %0d", what, i_na, exp);
    end
  endtask

  task automatic pulse(input line_drive_t kind, input int ns, input logic s);
    line = LD_0V; sel = s; #5;
    line = kind;  #(ns);
    line = LD_0V; #5;
    sel = 1'b0;   #5;
  endtask

  task automatic read_expect(input bit incl, input string what);
    sel = 1'b1; line = LD_READ;
    check_i(incl ? 76070 : 1890, what);
    line = LD_0V;
    check_i(0, {what, " literal 1"});
    sel = 1'b0; line = LD_READ;
    check_i(0, {what, " column off"});
    line = LD_0V; #4;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line = LD_0V; sel = 1'b0; #10;
    read_expect(1'b0, "initial HRS");
    pulse(LD_SET, 20, 1'b1);   read_expect(1'b0, "short SET keeps HRS");
    pulse(LD_SET, 35, 1'b0);   read_expect(1'b0, "SET with column off");
    pulse(LD_SET, 35, 1'b1);   read_expect(1'b1, "exclude->include");
    pulse(LD_SET, 35, 1'b1);   read_expect(1'b1, "include->include");
    pulse(LD_RESET, 20, 1'b1); read_expect(1'b1, "short RESET keeps LRS");
    pulse(LD_RESET, 35, 1'b1); read_expect(1'b0, "include->exclude");
    pulse(LD_RESET, 35, 1'b1); read_expect(1'b0, "exclude->exclude");
    pulse(LD_SET, 100, 1'b1);  read_expect(1'b1, "long SET");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
