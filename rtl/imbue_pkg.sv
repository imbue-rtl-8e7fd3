// imbue_pkg: types and default sizes shared by the IMBUE Tsetlin-machine
// inference array.
//
// line_drive_t is the level a literal (row) line carries. The four levels are
// the ones the architecture uses: 0 V (literal '1' and the idle/spacer level),
// 0.2 V (read level for literal '0'), +1 V (Vset, program include) and -2.5 V
// (Vreset, program exclude). The digital side only produces the code; the
// analog drivers that turn it into a voltage are outside the RTL, and the TA
// cell model reads the code directly.
//
// mode_t is the array mode set by the control unit. The default sizes come
// from the architecture description (32 TAs per partial-clause column, two
// partial clauses per clause) and, for the class/clause counts, from the
// smallest evaluated model (Noisy XOR: 2 classes, 12 clauses). The 5 ns clock
// period is this design's choice; it makes the 5 ns discharge one cycle.
`timescale 1ns/1ps
package imbue_pkg;

  typedef enum logic [1:0] {
    LD_0V    = 2'd0,   // literal '1' during a read, idle, spacer
    LD_READ  = 2'd1,   // 0.2 V: literal '0' during a read
    LD_SET   = 2'd2,   // +1 V programming pulse (exclude -> include)
    LD_RESET = 2'd3    // -2.5 V programming pulse (include -> exclude)
  } line_drive_t;

  typedef enum logic [1:0] {
    MODE_IDLE = 2'd0,
    MODE_READ = 2'd1,
    MODE_PROG = 2'd2
  } mode_t;

  // Array geometry defaults.
  localparam int unsigned W_DEF     = 32;  // TAs per partial-clause column
  localparam int unsigned PARTS_DEF = 2;   // partial clauses per full clause
  localparam int unsigned M_DEF     = 2;   // classes
  localparam int unsigned CPC_DEF   = 6;   // clauses per class

  // Electrical constants of the cell and column models (integer units).
  localparam int unsigned I_INC_NA_DEF = 76070; // include x literal '0' (nA)
  localparam int unsigned I_EXC_NA_DEF = 1890;  // exclude x literal '0' (nA)
  localparam int unsigned R_OHM_DEF    = 100;   // column resistor (Ohm)
  localparam int unsigned REF_UV_DEF   = 6800;  // CSA reference voltage (uV)
  localparam int unsigned T_PROG_NS_DEF = 35;   // minimum switching pulse (ns)

  // Control timing in 5 ns clock cycles.
  localparam int unsigned SETTLE_CYC_DEF = 2;  // read pulse before SE
  localparam int unsigned SE_CYC_DEF     = 4;  // SE high, 20 ns
  localparam int unsigned DIS_CYC_DEF    = 1;  // Dis high, 5 ns
  localparam int unsigned PROG_CYC_DEF   = 7;  // program pulse, 35 ns
  localparam int unsigned SPACER_CYC_DEF = 7;  // 0 V spacer after a pulse

endpackage
