// tb_updown_counters: random count strobes against a reference model
// (class = clause / CPC, even clause in class counts up, odd counts down),
// plus clear.
`timescale 1ns/1ps
module tb_updown_counters;
  localparam int M = 3, CPC = 6, SW = $clog2(CPC + 1) + 1;

  logic                 clk = 1'b0, rst_n, clr, en, clause_out;
  logic [4:0]           clause_idx;
  logic signed [SW-1:0] sums [M];
  int                   ref_s [M];
  int                   checks = 0, failures = 0;
  int                   ups = 0, downs = 0;

  updown_counters #(.M(M), .CPC(CPC)) dut (.*);

  always #2.5 clk = ~clk;

  task automatic compare(input string what);
    for (int m = 0; m < M; m++) begin
      checks++;
      if (int'(sums[m]) != ref_s[m]) begin
        failures++;
        $display("FAIL %s class %0d: %0d expected %0d", what, m, sums[m], ref_s[m]);
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clr = 1'b0; en = 1'b0; clause_out = 1'b0; clause_idx = '0;
    for (int m = 0; m < M; m++) ref_s[m] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk) clr = 1'b1;
      @(negedge clk) clr = 1'b0;
      for (int m = 0; m < M; m++) ref_s[m] = 0;
      compare("after clear");
      for (int n = 0; n < M * CPC; n++) begin
        clause_idx = 5'(n); clause_out = $urandom_range(1); en = $urandom_range(3) != 0;
        if (en && clause_out) begin
          if ((n % CPC) % 2 == 0) begin ref_s[n / CPC]++; ups++; end
          else begin ref_s[n / CPC]--; downs++; end
        end
        @(negedge clk);
        en = 1'b0;
        compare("count");
      end
    end
    checks++;
    if (ups == 0 || downs == 0) begin failures++; $display("FAIL no up or no down count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
