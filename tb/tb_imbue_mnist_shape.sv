// tb_imbue_mnist_shape: runs the array in the clause shape of the larger
// evaluated models (MNIST-type images): 1568 literals per clause (784 Boolean
// features) split over 49 partial-clause columns of 32 TAs. The number of
// classes and clauses is cut to 2 x 2 so that the model (6272 cells) builds
// and simulates in a few minutes; the per-clause structure is the full one. Each clause gets about 10
// includes (roughly the 0.6 % include density of such trained models), placed
// at random; only the includes are programmed, all other cells stay excluded.
// Random and clause-matching inputs are compared against a reference model of
// the class sums and the predicted class, and the latency is checked.
`timescale 1ns/1ps
module tb_imbue_mnist_shape;
  import imbue_pkg::*;
  localparam int W = 32, PARTS = 49, M = 2, CPC = 2;
  localparam int NCL = M * CPC, K = PARTS * W, F = K / 2;
  localparam int CW = $clog2(NCL), PW = $clog2(PARTS), RW = $clog2(W);
  localparam int MW = (M > 1) ? $clog2(M) : 1, SW = $clog2(CPC + 1) + 1;
  localparam int N_INFER = 30, INC_PER_CLAUSE = 10;

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

  imbue_top #(.W(W), .PARTS(PARTS), .M(M), .CPC(CPC)) dut (.*);

  always #2.5 clk = ~clk;

  bit ta [NCL][K];
  int checks = 0, failures = 0, n_fire = 0, n_late_viol = 0;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic program_ta(input int c, input int k, input bit inc);
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
      bit cl;
      cl = 1'b1;
      for (int k = 0; k < K; k++) if (ta[c][k] && !lit_of(x, k)) begin
        cl = 1'b0;
        if (k >= K - W) n_late_viol++;
      end
      if (cl) begin
        n_fire++;
        if ((c % CPC) % 2 == 0) exp_s[c / CPC]++; else exp_s[c / CPC]--;
      end
    end
    best = exp_s[0]; bi = 0;
    for (int m = 1; m < M; m++) if (exp_s[m] > best) begin best = exp_s[m]; bi = m; end
    @(negedge clk);
    while (!infer_ready) @(negedge clk);
    infer_valid = 1'b1; features = x;
    @(negedge clk);
    infer_valid = 1'b0;
    lat = 1;
    while (!result_valid) begin @(negedge clk); lat++; end
    chk(lat == NCL * 7 + 2, $sformatf("latency %0d", lat));
    chk(int'(result_class) == bi, $sformatf("class %0d expected %0d", result_class, bi));
    for (int m = 0; m < M; m++)
      chk(int'(class_sums[m]) == exp_s[m], $sformatf("sum[%0d]=%0d expected %0d", m, class_sums[m], exp_s[m]));
  endtask

  function automatic logic [F-1:0] rand_features();
    logic [F-1:0] x;
    for (int f = 0; f < F; f++) x[f] = 1'($urandom_range(1));
    return x;
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; prog_valid = 1'b0; infer_valid = 1'b0; prog_include = 1'b0;
    prog_clause = '0; prog_part = '0; prog_row = '0; features = '0;
    for (int c = 0; c < NCL; c++) for (int k = 0; k < K; k++) ta[c][k] = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < NCL; c++)
      for (int j = 0; j < INC_PER_CLAUSE; j++) begin
        int k;
        k = (j == 0) ? K - 1 - 2 * c : $urandom_range(K - 1);  // one include in the last column
        if (!ta[c][k ^ 1]) program_ta(c, k, 1'b1);
      end
    for (int t = 0; t < N_INFER; t++) begin
      logic [F-1:0] x;
      x = rand_features();
      if (t % 2 == 1) begin
        // satisfy the includes of a few random clauses
        for (int r = 0; r < 4; r++) begin
          int c;
          c = $urandom_range(NCL - 1);
          for (int k = 0; k < K; k++) if (ta[c][k]) x[k/2] = (k % 2 == 0);
        end
      end
      infer(x);
    end
    $display("firing clauses %0d, violations seen in the last column %0d", n_fire, n_late_viol);
    chk(n_fire > 0, "some clauses fired");
    chk(n_late_viol > 0, "violation in the 49th column");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
