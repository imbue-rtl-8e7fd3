// tb_partial_clause_column: programs random include patterns into a 32-cell
// column through the row lines, applies random literals and checks the column
// voltage against R * sum(current) computed from the nominal cell currents.
// Also checks the sensing margin that sets the column size: 32 excludes at
// literal '0' stay below the 6.8 mV reference, one lone include is above it.
`timescale 1ns/1ps
module tb_partial_clause_column;
  import imbue_pkg::*;
  localparam int W = 32;

  line_drive_t line [W];
  logic        sel;
  int unsigned col_uv;
  int          checks = 0, failures = 0;
  bit          inc [W];
  int unsigned last_uv;

  partial_clause_column #(.W(W)) dut (.line, .sel, .col_uv);

  task automatic all_rows(input line_drive_t v);
    for (int i = 0; i < W; i++) line[i] = v;
  endtask

  task automatic program_all();
    for (int i = 0; i < W; i++) begin
      all_rows(LD_0V); sel = 1'b1; #5;
      line[i] = inc[i] ? LD_SET : LD_RESET; #35;
      line[i] = LD_0V; #5;
    end
    sel = 1'b0; #5;
  endtask

  task automatic read_check(input bit lit [W], input string what);
    int unsigned exp_na;
    exp_na = 0;
    sel = 1'b1;
    for (int i = 0; i < W; i++) begin
      line[i] = lit[i] ? LD_0V : LD_READ;
      if (!lit[i]) exp_na += inc[i] ? 76070 : 1890;
    end
    #1;
    checks++;
    if (col_uv != exp_na / 10) begin
      failures++;
      $display("FAIL %s: col_uv=%0d expected %0d", what, col_uv, exp_na / 10);
    end
    last_uv = col_uv;
    all_rows(LD_0V); sel = 1'b0; #4;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit lit [W];
    all_rows(LD_0V); sel = 1'b0; #10;
    // margin: all exclude, all literals '0'
    for (int i = 0; i < W; i++) begin inc[i] = 1'b0; lit[i] = 1'b0; end
    program_all();
    read_check(lit, "all exclude lit0");
    checks++; if (!(last_uv < REF_UV_DEF)) begin failures++; $display("FAIL margin low %0d", last_uv); end
    // one include at row 7, its literal '0', every other literal '1'
    inc[7] = 1'b1;
    program_all();
    for (int i = 0; i < W; i++) lit[i] = (i != 7);
    read_check(lit, "single include");
    checks++; if (!(last_uv > REF_UV_DEF)) begin failures++; $display("FAIL margin high %0d", last_uv); end
    // column off: no current
    sel = 1'b0; for (int i = 0; i < W; i++) line[i] = LD_READ; #1;
    checks++; if (col_uv != 0) begin failures++; $display("FAIL column off %0d", col_uv); end
    all_rows(LD_0V); #4;
    // random patterns
    for (int t = 0; t < 8; t++) begin
      for (int i = 0; i < W; i++) inc[i] = ($urandom_range(3) == 0);
      program_all();
      for (int r = 0; r < 10; r++) begin
        for (int i = 0; i < W; i++) lit[i] = $urandom_range(1);
        read_check(lit, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
