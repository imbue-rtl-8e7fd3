// comparator: argmax over the class sums.
//
// Scans the M signed class sums and returns the index of the largest. On a
// tie the lowest class index wins (this design's choice). Purely
// combinational: a linear chain of M-1 signed comparisons.
`timescale 1ns/1ps
module comparator #(
  parameter int unsigned M  = imbue_pkg::M_DEF,
  parameter int unsigned SW = $clog2(imbue_pkg::CPC_DEF + 1) + 1,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic signed [SW-1:0] sums [M],
  output logic [MW-1:0]        winner
);

  always_comb begin
    logic signed [SW-1:0] best;
    best   = sums[0];
    winner = '0;
    for (int m = 1; m < int'(M); m++) begin
      if (sums[m] > best) begin
        best   = sums[m];
        winner = MW'(m);
      end
    end
  end

endmodule
