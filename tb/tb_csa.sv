// tb_csa: checks the sense amplifier model: Out1/Out2 after SE for column
// voltages above and below the reference, clearing by Dis, and that a second
// SE without a Dis in between keeps the stale decision.
`timescale 1ns/1ps
module tb_csa;
  int unsigned col_uv, ref_uv;
  logic        se, dis, out1, out2;
  int          checks = 0, failures = 0;

  csa dut (.col_uv, .ref_uv, .se, .dis, .out1, .out2);

  task automatic expect_out(input logic e1, input logic e2, input string what);
    #1;
    checks++;
    if (out1 !== e1 || out2 !== e2) begin
      failures++;
      $display("FAIL %s: out1=%b out2=%b expected %b %b", what, out1, out2, e1, e2);
    end
  endtask

  task automatic sense(input int unsigned v, input bit do_dis);
    col_uv = v; #10;
    se = 1'b1; #20;
    se = 1'b0;
    if (do_dis) begin dis = 1'b1; #5; dis = 1'b0; end
    #5;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_uv = 6800; col_uv = 0; se = 1'b0; dis = 1'b0;
    #10;
    expect_out(1'b0, 1'b0, "idle");
    col_uv = 13000; #10; se = 1'b1; expect_out(1'b1, 1'b0, "high column");
    #19; se = 1'b0; expect_out(1'b1, 1'b0, "held after SE");
    dis = 1'b1; expect_out(1'b0, 1'b0, "discharged");
    #4; dis = 1'b0;
    col_uv = 6048; #10; se = 1'b1; expect_out(1'b0, 1'b1, "low column");
    #19; se = 1'b0; dis = 1'b1; #5; dis = 1'b0;
    // no discharge: a later high column still reads low
    col_uv = 6000; se = 1'b1; #20; se = 1'b0; #5;
    col_uv = 20000; se = 1'b1; expect_out(1'b0, 1'b1, "stale without Dis");
    #19; se = 1'b0; dis = 1'b1; #5; dis = 1'b0;
    for (int t = 0; t < 200; t++) begin
      int unsigned v;
      v = $urandom_range(20000);
      col_uv = v; #5; se = 1'b1;
      expect_out(v > ref_uv, !(v > ref_uv), "random");
      #19; se = 1'b0; dis = 1'b1; #5; dis = 1'b0; #5;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
