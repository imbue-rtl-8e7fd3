// classification_output: result register for the predicted class.
//
// On `load` the comparator's winner is captured and `valid` goes high; `clr`
// (start of a new inference) drops valid. The class stays readable until the
// next load. One-cycle latency from load to valid.
`timescale 1ns/1ps
module classification_output #(
  parameter int unsigned M  = imbue_pkg::M_DEF,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          load,
  input  logic [MW-1:0] class_in,
  output logic [MW-1:0] class_out,
  output logic          valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_out <= '0;
      valid     <= 1'b0;
    end else if (load) begin
      class_out <= class_in;
      valid     <= 1'b1;
    end else if (clr) begin
      valid     <= 1'b0;
    end
  end

endmodule
