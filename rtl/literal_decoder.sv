// literal_decoder: turns the Boolean features into row-line levels.
//
// The feature vector is registered when `load` is high. Each feature x_f gives
// two literals, L[2f] = x_f and L[2f+1] = NOT x_f, so K = 2*F literals feed a
// clause. The literals are split over the PARTS partial-clause columns: part p,
// row i carries literal L[p*W + i]. All clauses share the same row lines, so
// every clause sees every literal.
//
// Levels (line_drive_t):
//   MODE_READ : literal '1' -> LD_0V, literal '0' -> LD_READ (0.2 V)
//   MODE_PROG : row prog_row of part prog_part carries prog_kind (LD_SET or
//               LD_RESET); every other row is at 0 V
//   MODE_IDLE : every row at 0 V (this is also the programming spacer)
// The encoding of literals as voltages (1 -> 0 V, 0 -> 0.2 V) is the
// architecture's; the feature register and the literal order are this design's.
// Lines follow mode combinationally; features change one cycle after load.
`timescale 1ns/1ps
module literal_decoder
  import imbue_pkg::*;
#(
  parameter int unsigned W     = W_DEF,
  parameter int unsigned PARTS = PARTS_DEF,
  localparam int unsigned F  = PARTS * W / 2,
  localparam int unsigned RW = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned PW = (PARTS > 1) ? $clog2(PARTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [F-1:0]      features,
  input  mode_t             mode,
  input  logic [PW-1:0]     prog_part,
  input  logic [RW-1:0]     prog_row,
  input  line_drive_t       prog_kind,
  output line_drive_t       line [PARTS][W]
);

  logic [F-1:0]       feat_q;
  logic [2*F-1:0]     lits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    feat_q <= '0;
    else if (load) feat_q <= features;
  end

  always_comb begin
    for (int f = 0; f < int'(F); f++) begin
      lits[2*f]   = feat_q[f];
      lits[2*f+1] = ~feat_q[f];
    end
  end

  always_comb begin
    for (int p = 0; p < int'(PARTS); p++) begin
      for (int i = 0; i < int'(W); i++) begin
        unique case (mode)
          MODE_READ: line[p][i] = lits[p*W+i] ? LD_0V : LD_READ;
          MODE_PROG: line[p][i] = (p == int'(prog_part) && i == int'(prog_row)) ? prog_kind : LD_0V;
          default:   line[p][i] = LD_0V;
        endcase
      end
    end
  end

endmodule
