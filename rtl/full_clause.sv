// full_clause: combines the partial-clause sense-amplifier outputs of one
// clause into the full clause output.
//
// A CSA output is high when its column carried the current of at least one
// included TA whose literal is '0', i.e. when that part of the clause is
// violated. Each CSA output is therefore inverted (one inverter per part) and
// the inverted values are ANDed:
//   clause_out = AND_p NOT csa_out[p]   (C_N = c_2N AND c_2N+1 for two parts)
// The inverter-and-AND structure is the architecture's; allowing more than two
// parts (PARTS > 2) is this design's generalisation for wide clauses.
// Purely combinational.
`timescale 1ns/1ps
module full_clause #(
  parameter int unsigned PARTS = imbue_pkg::PARTS_DEF
) (
  input  logic [PARTS-1:0] csa_out,
  output logic             clause_out
);

  logic [PARTS-1:0] c_inv;   // outputs of the per-part inverters

  assign c_inv      = ~csa_out;
  assign clause_out = &c_inv;

endmodule
