// tb_full_clause: exhaustive check of the invert-and-AND clause logic for two
// parts (the default) and three parts.
`timescale 1ns/1ps
module tb_full_clause;
  logic [1:0] c2;
  logic [2:0] c3;
  logic       o2, o3;
  int         checks = 0, failures = 0;

  full_clause #(.PARTS(2)) dut2 (.csa_out(c2), .clause_out(o2));
  full_clause #(.PARTS(3)) dut3 (.csa_out(c3), .clause_out(o3));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      c2 = 2'(v); #1;
      checks++;
      if (o2 !== (v == 0)) begin failures++; $display("FAIL parts=2 in=%b out=%b", c2, o2); end
    end
    for (int v = 0; v < 8; v++) begin
      c3 = 3'(v); #1;
      checks++;
      if (o3 !== (v == 0)) begin failures++; $display("FAIL parts=3 in=%b out=%b", c3, o3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
