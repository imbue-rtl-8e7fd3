// tb_classification_output: load, hold, clear and reload of the result
// register.
`timescale 1ns/1ps
module tb_classification_output;
  localparam int M = 10;

  logic       clk = 1'b0, rst_n, clr, load, valid;
  logic [3:0] class_in, class_out;
  int         checks = 0, failures = 0;

  classification_output #(.M(M)) dut (.*);

  always #2.5 clk = ~clk;

  task automatic expect_o(input logic v, input logic [3:0] c, input string what);
    checks++;
    if (valid !== v || (v && class_out !== c)) begin
      failures++;
      $display("FAIL %s: valid=%b class=%0d expected %b %0d", what, valid, class_out, v, c);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clr = 1'b0; load = 1'b0; class_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    expect_o(1'b0, 0, "after reset");
    for (int t = 0; t < 30; t++) begin
      logic [3:0] c;
      c = 4'($urandom_range(M - 1));
      @(negedge clk) clr = 1'b1;
      @(negedge clk) clr = 1'b0; expect_o(1'b0, 0, "cleared");
      class_in = c; load = 1'b1;
      @(negedge clk) load = 1'b0; class_in = ~c; expect_o(1'b1, c, "loaded");
      repeat (3) @(negedge clk);
      expect_o(1'b1, c, "held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
