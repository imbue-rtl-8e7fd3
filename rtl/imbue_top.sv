// imbue_top: the IMBUE in-memory Tsetlin-machine inference array.
//
// M classes with CPC clauses each (NCLAUSES = M*CPC). Every clause holds
// K = PARTS*W trained TA actions as 1T1R ReRAM cells, split over PARTS
// crossbar columns of W cells (partial clauses). The F = K/2 Boolean features
// become K literals in the literal decoder, which drives them as row voltages
// shared by all clauses. For one clause at a time the column line selector
// switches on its columns; each column's current develops a voltage across
// its resistor, one CSA per column compares it with REF_UV, and the
// full-clause logic inverts and ANDs the CSA outputs. The up/down counters
// add +1/-1 per firing clause into its class sum, the comparator picks the
// largest class sum and the classification output holds the answer. The
// control unit sequences this and also programs the TA cells, one per
// prog_valid/prog_ready request (prog_include = 1 for include).
//
// Interface: prog_* programs one TA (clause, part, row); infer_valid with
// features starts an inference; result_valid/result_class give the answer
// NCLAUSES*7+2 cycles after acceptance (5 ns clock). class_sums shows the counters.
// The ReRAM cells, columns and CSAs are behavioural models; the rest is
// synthesizable logic.
`timescale 1ns/1ps
module imbue_top
  import imbue_pkg::*;
#(
  parameter int unsigned W      = W_DEF,
  parameter int unsigned PARTS  = PARTS_DEF,
  parameter int unsigned M      = M_DEF,
  parameter int unsigned CPC    = CPC_DEF,
  parameter int unsigned REF_UV = REF_UV_DEF,
  localparam int unsigned NCLAUSES = M * CPC,
  localparam int unsigned F  = PARTS * W / 2,
  localparam int unsigned CW = (NCLAUSES > 1) ? $clog2(NCLAUSES) : 1,
  localparam int unsigned PW = (PARTS > 1) ? $clog2(PARTS) : 1,
  localparam int unsigned RW = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned SW = $clog2(CPC + 1) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 prog_valid,
  output logic                 prog_ready,
  input  logic [CW-1:0]        prog_clause,
  input  logic [PW-1:0]        prog_part,
  input  logic [RW-1:0]        prog_row,
  input  logic                 prog_include,
  input  logic                 infer_valid,
  output logic                 infer_ready,
  input  logic [F-1:0]         features,
  output logic                 result_valid,
  output logic [MW-1:0]        result_class,
  output logic signed [SW-1:0] class_sums [M]
);

  // The reference must separate a column of W excluded cells reading '0'
  // (leakage floor) from a single included cell reading '0'.
  localparam longint unsigned FLOOR_UV = longint'(W) * I_EXC_NA_DEF * R_OHM_DEF / 1000;
  localparam longint unsigned ONE_UV   = longint'(I_INC_NA_DEF) * R_OHM_DEF / 1000;
  if (longint'(REF_UV) <= FLOOR_UV || longint'(REF_UV) >= ONE_UV) begin : g_ref_outside_margin
    $error("imbue_top: REF_UV outside the sensing margin for this W");
  end

  mode_t         mode;
  logic [CW-1:0] sel_clause;
  logic [PW-1:0] sel_part;
  logic [RW-1:0] sel_row;
  line_drive_t   prog_kind;
  logic          se, dis, lit_load, cnt_clr, cnt_en, res_clr, res_load;

  line_drive_t                  line [PARTS][W];
  logic [NCLAUSES*PARTS-1:0]    col_sel;
  logic [PARTS-1:0]             csa_out [NCLAUSES];
  logic [NCLAUSES-1:0]          clause_out;
  logic [MW-1:0]                winner;

  control_unit #(.NCLAUSES(NCLAUSES), .PARTS(PARTS), .W(W)) u_ctrl (
    .clk, .rst_n,
    .prog_valid, .prog_ready, .prog_clause, .prog_part, .prog_row, .prog_include,
    .infer_valid, .infer_ready,
    .mode, .sel_clause, .sel_part, .sel_row, .prog_kind, .se, .dis,
    .lit_load, .cnt_clr, .cnt_en, .res_clr, .res_load
  );

  literal_decoder #(.W(W), .PARTS(PARTS)) u_lit (
    .clk, .rst_n, .load(lit_load), .features, .mode,
    .prog_part(sel_part), .prog_row(sel_row), .prog_kind, .line
  );

  column_line_selector #(.NCLAUSES(NCLAUSES), .PARTS(PARTS)) u_cls (
    .mode, .clause(sel_clause), .part(sel_part), .col_sel
  );

  for (genvar c = 0; c < NCLAUSES; c++) begin : g_clause
    for (genvar p = 0; p < PARTS; p++) begin : g_part
      int unsigned col_uv;
      logic        csa_out2;   // complementary CSA node, not used by the clause logic
      partial_clause_column #(.W(W)) u_col (
        .line(line[p]), .sel(col_sel[c*PARTS+p]), .col_uv
      );
      csa u_csa (
        .col_uv, .ref_uv(REF_UV), .se, .dis, .out1(csa_out[c][p]), .out2(csa_out2)
      );
    end
    full_clause #(.PARTS(PARTS)) u_fc (
      .csa_out(csa_out[c]), .clause_out(clause_out[c])
    );
  end

  updown_counters #(.M(M), .CPC(CPC)) u_cnt (
    .clk, .rst_n, .clr(cnt_clr), .en(cnt_en),
    .clause_idx(sel_clause), .clause_out(clause_out[sel_clause]),
    .sums(class_sums)
  );

  comparator #(.M(M), .SW(SW)) u_cmp (.sums(class_sums), .winner);

  classification_output #(.M(M)) u_out (
    .clk, .rst_n, .clr(res_clr), .load(res_load), .class_in(winner),
    .class_out(result_class), .valid(result_valid)
  );

endmodule
