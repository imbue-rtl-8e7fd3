// tb_comparator: random and tied class sums; the winner must be the index of
// the largest sum, lowest index on a tie.
`timescale 1ns/1ps
module tb_comparator;
  localparam int M = 10, SW = 8;

  logic signed [SW-1:0] sums [M];
  logic [3:0]           winner;
  int                   checks = 0, failures = 0;

  comparator #(.M(M), .SW(SW)) dut (.sums, .winner);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int best, bi;
      for (int m = 0; m < M; m++)
        sums[m] = (t % 2 == 0) ? SW'($urandom_range(255)) : SW'(int'($urandom_range(4)) - 2);
      #1;
      best = int'(sums[0]); bi = 0;
      for (int m = 1; m < M; m++) if (int'(sums[m]) > best) begin best = int'(sums[m]); bi = m; end
      checks++;
      if (int'(winner) != bi) begin failures++; $display("FAIL t=%0d winner=%0d expected %0d", t, winner, bi); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
