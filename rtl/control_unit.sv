// control_unit: sequences TA programming and inference on the IMBUE array.
//
// Programming (prog_valid/prog_ready handshake, one TA per request):
//   PROG_PULSE  PROG_CYC cycles   mode = PROG: the column line of (clause,
//                                 part) is on, SE is low, and the row prog_row
//                                 carries Vset (include) or Vreset (exclude).
//                                 7 cycles at 5 ns = the 35 ns switching pulse.
//   PROG_SPACER SPACER_CYC cycles mode = IDLE, every line at 0 V.
//
// Inference (infer_valid/infer_ready handshake; the features are latched by
// the literal decoder on lit_load). For each clause n = 0 .. NCLAUSES-1 one
// read pulse of SETTLE_CYC + SE_CYC + DIS_CYC cycles (2 + 4 + 1 = 35 ns):
//   RD_SETTLE  mode = READ, literals and the clause's column lines applied
//   RD_SENSE   SE high (20 ns): the CSAs latch; on its last cycle cnt_en
//              counts the full clause output of clause n
//   RD_DIS     Dis high (5 ns): the CSA nodes are discharged
// After the last clause, RESULT loads the comparator's answer (res_load).
// result_valid rises NCLAUSES * 7 + 2 cycles after the accepting clock edge
// (NCLAUSES read pulses, the result-load cycle, the output register).
//
// The phase lengths of SE, Dis, the read pulse and the programming pulse are
// the architecture's (in ns); the 5 ns clock, the settle time before SE, the
// spacer length, the clause order and the handshakes are this design's.
// A programming request wins over an inference request in the same cycle.
`timescale 1ns/1ps
module control_unit
  import imbue_pkg::*;
#(
  parameter int unsigned NCLAUSES   = M_DEF * CPC_DEF,
  parameter int unsigned PARTS      = PARTS_DEF,
  parameter int unsigned W          = W_DEF,
  parameter int unsigned SETTLE_CYC = SETTLE_CYC_DEF,
  parameter int unsigned SE_CYC     = SE_CYC_DEF,
  parameter int unsigned DIS_CYC    = DIS_CYC_DEF,
  parameter int unsigned PROG_CYC   = PROG_CYC_DEF,
  parameter int unsigned SPACER_CYC = SPACER_CYC_DEF,
  localparam int unsigned CW = (NCLAUSES > 1) ? $clog2(NCLAUSES) : 1,
  localparam int unsigned PW = (PARTS > 1) ? $clog2(PARTS) : 1,
  localparam int unsigned RW = (W > 1) ? $clog2(W) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // programming request
  input  logic          prog_valid,
  output logic          prog_ready,
  input  logic [CW-1:0] prog_clause,
  input  logic [PW-1:0] prog_part,
  input  logic [RW-1:0] prog_row,
  input  logic          prog_include,
  // inference request
  input  logic          infer_valid,
  output logic          infer_ready,
  // array control
  output mode_t         mode,
  output logic [CW-1:0] sel_clause,
  output logic [PW-1:0] sel_part,
  output logic [RW-1:0] sel_row,
  output line_drive_t   prog_kind,
  output logic          se,
  output logic          dis,
  // datapath strobes
  output logic          lit_load,
  output logic          cnt_clr,
  output logic          cnt_en,
  output logic          res_clr,
  output logic          res_load
);

  typedef enum logic [2:0] {
    S_IDLE, S_PROG_PULSE, S_PROG_SPACER, S_RD_SETTLE, S_RD_SENSE, S_RD_DIS, S_RESULT
  } state_t;

  state_t        state;
  int unsigned   cyc;        // cycles spent in the current state
  logic [CW-1:0] clause_q;
  logic [PW-1:0] part_q;
  logic [RW-1:0] row_q;
  logic          incl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cyc      <= 0;
      clause_q <= '0;
      part_q   <= '0;
      row_q    <= '0;
      incl_q   <= 1'b0;
    end else begin
      cyc <= cyc + 1;
      unique case (state)
        S_IDLE: begin
          cyc <= 0;
          if (prog_valid) begin
            state    <= S_PROG_PULSE;
            clause_q <= prog_clause;
            part_q   <= prog_part;
            row_q    <= prog_row;
            incl_q   <= prog_include;
          end else if (infer_valid) begin
            state    <= S_RD_SETTLE;
            clause_q <= '0;
          end
        end
        S_PROG_PULSE:
          if (cyc == PROG_CYC - 1) begin state <= S_PROG_SPACER; cyc <= 0; end
        S_PROG_SPACER:
          if (cyc == SPACER_CYC - 1) begin state <= S_IDLE; cyc <= 0; end
        S_RD_SETTLE:
          if (cyc == SETTLE_CYC - 1) begin state <= S_RD_SENSE; cyc <= 0; end
        S_RD_SENSE:
          if (cyc == SE_CYC - 1) begin state <= S_RD_DIS; cyc <= 0; end
        S_RD_DIS:
          if (cyc == DIS_CYC - 1) begin
            cyc <= 0;
            if (int'(clause_q) == NCLAUSES - 1) state <= S_RESULT;
            else begin
              state    <= S_RD_SETTLE;
              clause_q <= clause_q + 1'b1;
            end
          end
        S_RESULT: begin
          state <= S_IDLE;
          cyc   <= 0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    prog_ready  = (state == S_IDLE);
    infer_ready = (state == S_IDLE) && !prog_valid;
    unique case (state)
      S_PROG_PULSE:                       mode = MODE_PROG;
      S_RD_SETTLE, S_RD_SENSE, S_RD_DIS:  mode = MODE_READ;
      default:                            mode = MODE_IDLE;
    endcase
    sel_clause = clause_q;
    sel_part   = part_q;
    sel_row    = row_q;
    prog_kind  = incl_q ? LD_SET : LD_RESET;
    se         = (state == S_RD_SENSE);
    dis        = (state == S_RD_DIS);
    lit_load   = (state == S_IDLE) && infer_valid && !prog_valid;
    cnt_clr    = lit_load;
    res_clr    = lit_load;
    cnt_en     = (state == S_RD_SENSE) && (cyc == SE_CYC - 1);
    res_load   = (state == S_RESULT);
  end

  // The CSA must never sense and discharge at once, and SE stays low while a
  // TA is programmed.
  a_se_dis:  assert property (@(posedge clk) !(se && dis));
  a_prog_se: assert property (@(posedge clk) (mode == MODE_PROG) |-> !se);

endmodule
