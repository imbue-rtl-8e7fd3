// tb_imbue_top: end-to-end test of the IMBUE array at its default size
// (2 classes x 6 clauses, 64 literals per clause in two 32-cell columns).
//
// 1. Programs every TA cell of a random sparse model (0..3 includes per
//    clause) through the programming handshake.
// 2. Reprograms a random subset of cells to new actions.
// 3. Runs random inferences and compares the class sums and the predicted
//    class with a reference model computed here from the same TA actions:
//    clause = AND over literals of (literal OR NOT include), class sum =
//    positive minus negative firing clauses, argmax with lowest index on ties.
// Checks the inference latency (NCLAUSES*7+2 cycles) and counts how often
// each mechanism happened: the four programming transitions, up and down
// counts, a violated first and second partial clause, firing and silent
// clauses, each class winning, a tie, one SE and one Dis phase per clause
// read. Any that never happened is a failure.
`timescale 1ns/1ps
module tb_imbue_top;
  import imbue_pkg::*;
  localparam int W = W_DEF, PARTS = PARTS_DEF, M = M_DEF, CPC = CPC_DEF;
  localparam int NCL = M * CPC, K = PARTS * W, F = K / 2;
  localparam int CW = $clog2(NCL), PW = (PARTS > 1) ? $clog2(PARTS) : 1, RW = $clog2(W);
  localparam int MW = (M > 1) ? $clog2(M) : 1, SW = $clog2(CPC + 1) + 1;
  localparam int N_INFER = 300;

  logic                 clk = 1'b0, rst_n;
  logic                 prog_valid, prog_ready, prog_include;
  logic [CW-1:0]        prog_clause;
  logic [PW-1:0]        prog_part;
  logic [RW-1:0]        prog_row;
  logic                 infer_valid, infer_ready;
  logic [F-1:0]         features;
  logic                 result_valid;
  logic [MW-1:0]        result_class;
  logic signed [SW-1:0] class_sums [M];

  imbue_top dut (.*);

  always #2.5 clk = ~clk;

  bit ta [NCL][K];     // reference copy of the programmed actions
  int checks = 0, failures = 0;
  // mechanism counters
  int n_exc2inc = 0, n_inc2inc = 0, n_inc2exc = 0, n_exc2exc = 0;
  int n_up = 0, n_down = 0, n_viol0 = 0, n_viol1 = 0, n_fire = 0, n_silent = 0, n_tie = 0;
  int n_win [M];
  int n_se = 0, n_dis = 0;   // CSA sense and discharge phases seen

  always @(posedge dut.se)  n_se++;
  always @(posedge dut.dis) n_dis++;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic program_ta(input int c, input int k, input bit inc);
    if (ta[c][k] && inc) n_inc2inc++;
    else if (ta[c][k] && !inc) n_inc2exc++;
    else if (!ta[c][k] && inc) n_exc2inc++;
    else n_exc2exc++;
    ta[c][k] = inc;
    @(negedge clk);
    while (!prog_ready) @(negedge clk);
    prog_valid = 1'b1; prog_clause = CW'(c); prog_part = PW'(k / W); prog_row = RW'(k % W);
    prog_include = inc;
    @(negedge clk);
    prog_valid = 1'b0;
  endtask

  function automatic bit lit_of(input logic [F-1:0] x, input int k);
    return (k % 2 == 0) ? x[k/2] : !x[k/2];
  endfunction

  task automatic infer(input logic [F-1:0] x);
    int exp_s [M];
    int lat, best, bi;
    for (int m = 0; m < M; m++) exp_s[m] = 0;
    for (int c = 0; c < NCL; c++) begin
      bit part_ok [PARTS];
      bit cl;
      cl = 1'b1;
      for (int p = 0; p < PARTS; p++) begin
        part_ok[p] = 1'b1;
        for (int i = 0; i < W; i++)
          if (ta[c][p*W+i] && !lit_of(x, p*W+i)) part_ok[p] = 1'b0;
        cl = cl & part_ok[p];
      end
      if (!part_ok[0]) n_viol0++;
      if (PARTS > 1 && !part_ok[PARTS-1]) n_viol1++;
      if (cl) begin
        n_fire++;
        if ((c % CPC) % 2 == 0) begin exp_s[c / CPC]++; n_up++; end
        else begin exp_s[c / CPC]--; n_down++; end
      end else n_silent++;
    end
    best = exp_s[0]; bi = 0;
    for (int m = 1; m < M; m++) begin
      if (exp_s[m] > best) begin best = exp_s[m]; bi = m; end
    end
    for (int m = 1; m < M; m++) if (exp_s[m] == exp_s[0] && bi == 0) begin n_tie++; break; end
    n_win[bi]++;
    @(negedge clk);
    while (!infer_ready) @(negedge clk);
    infer_valid = 1'b1; features = x;
    @(negedge clk);
    infer_valid = 1'b0; features = ~x;   // the array must use the latched copy
    lat = 1;
    while (!result_valid) begin @(negedge clk); lat++; end
    chk(lat == NCL * 7 + 2, $sformatf("latency %0d expected %0d", lat, NCL * 7 + 2));
    chk(int'(result_class) == bi, $sformatf("class %0d expected %0d", result_class, bi));
    for (int m = 0; m < M; m++)
      chk(int'(class_sums[m]) == exp_s[m], $sformatf("sum[%0d]=%0d expected %0d", m, class_sums[m], exp_s[m]));
  endtask

  function automatic logic [F-1:0] rand_features();
    logic [F-1:0] x;
    for (int f = 0; f < F; f++) x[f] = 1'($urandom_range(1));
    return x;
  endfunction

  // features that satisfy clause c's includes, so that it fires
  function automatic logic [F-1:0] match_features(input int c);
    logic [F-1:0] x;
    x = rand_features();
    for (int k = 0; k < K; k++)
      if (ta[c][k]) x[k/2] = (k % 2 == 0);
    return x;
  endfunction

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; prog_valid = 1'b0; infer_valid = 1'b0; prog_include = 1'b0;
    prog_clause = '0; prog_part = '0; prog_row = '0; features = '0;
    for (int m = 0; m < M; m++) n_win[m] = 0;
    for (int c = 0; c < NCL; c++) for (int k = 0; k < K; k++) ta[c][k] = 1'b0;  // cells start in HRS
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. program a sparse model, one include per literal pair at most
    for (int c = 0; c < NCL; c++) begin
      bit want [K];
      int ninc;
      for (int k = 0; k < K; k++) want[k] = 1'b0;
      ninc = $urandom_range(3);
      for (int j = 0; j < ninc; j++) want[$urandom_range(K - 1)] = 1'b1;
      for (int k = 0; k < K; k += 2) if (want[k] && want[k+1]) want[k+1] = 1'b0;
      for (int k = 0; k < K; k++) program_ta(c, k, want[k]);
    end
    // 2. reprogram some cells
    for (int j = 0; j < 40; j++) begin
      int c, k;
      c = $urandom_range(NCL - 1); k = $urandom_range(K - 1);
      if (!ta[c][k ^ 1]) program_ta(c, k, ($urandom_range(1) == 1));
    end
    for (int c = 0; c < NCL; c++) program_ta(c, 2 * c, 1'b1);  // at least one include each
    for (int c = 0; c < 4; c++) begin
      program_ta(c, 2 * c, 1'b0);                              // include -> exclude
      program_ta(c, 2 * c, 1'b1);
    end
    for (int c = 0; c < NCL; c++) begin
      program_ta(c, 2 * c, 1'b1);                              // include -> include
      if (!ta[c][2 * c + 1]) program_ta(c, 2 * c + 1, 1'b0);   // exclude -> exclude
    end
    // 3. inferences: random inputs and inputs that make one clause fire
    for (int t = 0; t < N_INFER; t++) begin
      if (t % 3 == 0) infer(rand_features());
      else infer(match_features($urandom_range(NCL - 1)));
    end
    // all-zero features
    infer('0);

    $display("mechanisms: exc->inc=%0d inc->inc=%0d inc->exc=%0d exc->exc=%0d up=%0d down=%0d viol0=%0d viol1=%0d fire=%0d silent=%0d tie=%0d",
             n_exc2inc, n_inc2inc, n_inc2exc, n_exc2exc, n_up, n_down, n_viol0, n_viol1, n_fire, n_silent, n_tie);
    $display("CSA phases: SE=%0d Dis=%0d", n_se, n_dis);
    chk(n_exc2inc > 0, "exclude->include programmed");
    chk(n_inc2inc > 0, "include->include programmed");
    chk(n_inc2exc > 0, "include->exclude programmed");
    chk(n_exc2exc > 0, "exclude->exclude programmed");
    chk(n_up > 0 && n_down > 0, "up and down counts");
    chk(n_viol0 > 0 && n_viol1 > 0, "violations in both partial clauses");
    chk(n_fire > 0 && n_silent > 0, "firing and silent clauses");
    chk(n_tie > 0, "tie between class sums");
    chk(n_se == NCL * (N_INFER + 1) && n_dis == n_se, $sformatf("one SE and one Dis phase per clause read (%0d, %0d)", n_se, n_dis));
    for (int m = 0; m < M; m++) chk(n_win[m] > 0, $sformatf("class %0d predicted", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
