// ta_cell: behavioural model of the 1T1R Tsetlin-automaton cell (analog part,
// not synthesizable logic).
//
// A ReRAM device in series with a PMOS access transistor. The device holds
// the trained TA action as its resistance: low-resistance state (LRS) means
// include, high-resistance state (HRS) means exclude. The literal arrives as
// a voltage on the row line `line`; the column line `sel` turns the access
// transistor on. The model returns the cell current in nA:
//   selected, 0.2 V (literal '0'), include : I_INC_NA (76.07 uA)
//   selected, 0.2 V (literal '0'), exclude : I_EXC_NA (1.89 uA)
//   otherwise (0 V literal '1', or column off): 0
// These are the nominal currents of the characterised device; device-to-device
// and cycle-to-cycle variation is not modelled.
//
// Programming: a Vset (LD_SET) pulse on the row of a selected cell sets it to
// LRS, a Vreset (LD_RESET) pulse resets it to HRS, but only if the pulse lasts
// at least T_PROG_NS (35 ns, the switching threshold of the device). A shorter
// pulse leaves the state unchanged. Repeating a pulse into the state the cell
// already has keeps it there. The state before any programming is INIT_LRS,
// a choice of this model. Times are measured with $time in ns.
`timescale 1ns/1ps
module ta_cell
  import imbue_pkg::*;
#(
  parameter int unsigned I_INC_NA  = I_INC_NA_DEF,
  parameter int unsigned I_EXC_NA  = I_EXC_NA_DEF,
  parameter int unsigned T_PROG_NS = T_PROG_NS_DEF,
  parameter bit          INIT_LRS  = 1'b0
) (
  input  line_drive_t line,
  input  logic        sel,
  output int unsigned i_na
);

  logic        lrs;         // device state: 1 = LRS (include)
  logic        pulse_on;    // a programming pulse is being applied
  line_drive_t pulse_kind;
  time         t_start;

  initial begin
    lrs        = INIT_LRS;
    pulse_on   = 1'b0;
    pulse_kind = LD_0V;
    t_start    = 0;
  end

  // Read current (Ohm's law on the two device states, Table of nominal values).
  always_comb begin
    if (sel && line == LD_READ) i_na = lrs ? I_INC_NA : I_EXC_NA;
    else                        i_na = 0;
  end

  // Programming pulse timing: the pulse ends when the column is released or
  // the row leaves the programming level; its length decides the switch.
  always @(line or sel) begin
    if (pulse_on && !(sel && line == pulse_kind)) begin
      if ($time - t_start >= time'(T_PROG_NS)) lrs = (pulse_kind == LD_SET);
      pulse_on = 1'b0;
    end
    if (!pulse_on && sel && (line == LD_SET || line == LD_RESET)) begin
      pulse_on   = 1'b1;
      pulse_kind = line;
      t_start    = $time;
    end
  end

endmodule
