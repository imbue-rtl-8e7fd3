// csa: behavioural model of the current sense amplifier (analog latch, not
// synthesizable logic).
//
// The transistor-level circuit is a pair of cross-coupled inverters with the
// column voltage Col_line and the reference Ref_volt on the two input
// transistors, an SE (sense enable) tail switch and two Dis transistors that
// pull the internal nodes Out1/Out2 to ground. This model keeps that
// behaviour at the level of events:
//   rising SE, both nodes discharged : Out1 = (Col_line > Ref_volt),
//                                      Out2 = !Out1 (the latch regenerates)
//   Dis high                         : Out1 = Out2 = 0
// Out1 is high when the column carries the current of an include with a
// literal '0', the case the characterisation reports as Out1 near VDD.
// If the nodes were not discharged before SE rises again, the model keeps the
// old decision: this stands for the bias that the discharge phase exists to
// remove, and makes a missing Dis phase visible in simulation.
// Voltages are integers in microvolts.
`timescale 1ns/1ps
module csa (
  input  int unsigned col_uv,
  input  int unsigned ref_uv,
  input  logic        se,
  input  logic        dis,
  output logic        out1,
  output logic        out2
);

  initial begin
    out1 = 1'b0;
    out2 = 1'b0;
  end

  always @(posedge se or posedge dis) begin
    if (dis) begin
      out1 <= 1'b0;
      out2 <= 1'b0;
    end else if (!out1 && !out2) begin
      out1 <= (col_uv > ref_uv);
      out2 <= !(col_uv > ref_uv);
    end
  end

endmodule
