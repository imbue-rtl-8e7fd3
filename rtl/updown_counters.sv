// updown_counters: one signed up/down counter per class, producing the class
// sums.
//
// Clause n belongs to class n / CPC. Within a class, even-numbered clauses
// have positive polarity and odd-numbered clauses negative polarity, so each
// class has equally many of both. When `en` is high and the counted clause
// fired (clause_out = 1), the counter of its class steps up by one for a
// positive clause and down by one for a negative clause. `clr` zeroes all
// counters and has priority over en. Each counter is SW bits wide, enough
// for the range -CPC/2 .. +CPC/2. Counting is one clause per enabled cycle;
// sums show the new value the cycle after en.
// The class/polarity assignment by index is this design's choice.
`timescale 1ns/1ps
module updown_counters
  import imbue_pkg::*;
#(
  parameter int unsigned M   = M_DEF,
  parameter int unsigned CPC = CPC_DEF,
  localparam int unsigned NCLAUSES = M * CPC,
  localparam int unsigned CW = (NCLAUSES > 1) ? $clog2(NCLAUSES) : 1,
  localparam int unsigned SW = $clog2(CPC + 1) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic [CW-1:0]        clause_idx,
  input  logic                 clause_out,
  output logic signed [SW-1:0] sums [M]
);

  localparam logic signed [SW-1:0] ONE = SW'(1);

  // Every class needs as many positive as negative clauses.
  if (CPC % 2 != 0) begin : g_cpc_odd
    $error("updown_counters: CPC must be even");
  end

  int unsigned cls;      // class of the counted clause
  logic        pos;      // its polarity: 1 = positive

  always_comb begin
    cls = int'(clause_idx) / CPC;
    pos = ((int'(clause_idx) % CPC) % 2) == 0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < int'(M); m++) sums[m] <= '0;
    end else if (clr) begin
      for (int m = 0; m < int'(M); m++) sums[m] <= '0;
    end else if (en && clause_out) begin
      for (int m = 0; m < int'(M); m++)
        if (m == int'(cls)) sums[m] <= pos ? sums[m] + ONE : sums[m] - ONE;
    end
  end

endmodule
