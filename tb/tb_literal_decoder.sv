// tb_literal_decoder: loads random feature vectors and checks every row level
// in read mode (literal 2f = x_f, 2f+1 = NOT x_f; '1' -> 0 V, '0' -> 0.2 V;
// part p row i = literal p*W+i), the single pulsed row in program mode, all
// rows at 0 V when idle, and that features only change on load.
`timescale 1ns/1ps
module tb_literal_decoder;
  import imbue_pkg::*;
  localparam int W = 32, PARTS = 2, F = PARTS * W / 2;

  logic              clk = 1'b0, rst_n, load;
  logic [F-1:0]      features, fref;
  mode_t             mode;
  logic [0:0]        prog_part;
  logic [4:0]        prog_row;
  line_drive_t       prog_kind;
  line_drive_t       line [PARTS][W];
  int                checks = 0, failures = 0;

  literal_decoder #(.W(W), .PARTS(PARTS)) dut (.*);

  always #2.5 clk = ~clk;

  task automatic check_read();
    for (int p = 0; p < PARTS; p++)
      for (int i = 0; i < W; i++) begin
        int k; bit lit; line_drive_t e;
        k   = p * W + i;
        lit = (k % 2 == 0) ? fref[k/2] : !fref[k/2];
        e   = lit ? LD_0V : LD_READ;
        checks++;
        if (line[p][i] !== e) begin
          failures++;
          $display("FAIL read p=%0d i=%0d got %s exp %s", p, i, line[p][i].name(), e.name());
        end
      end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; load = 1'b0; features = '0; mode = MODE_IDLE;
    prog_part = '0; prog_row = '0; prog_kind = LD_SET;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      features = {$urandom, $urandom}; fref = features; load = 1'b1;
      @(negedge clk);
      load = 1'b0; features = ~features;  // must not be taken without load
      mode = MODE_READ; #1; check_read();
      mode = MODE_IDLE; #1;
      for (int p = 0; p < PARTS; p++)
        for (int i = 0; i < W; i++) begin
          checks++;
          if (line[p][i] !== LD_0V) begin failures++; $display("FAIL idle p=%0d i=%0d", p, i); end
        end
      mode = MODE_PROG; prog_part = 1'($urandom_range(1)); prog_row = 5'($urandom_range(31));
      prog_kind = $urandom_range(1) ? LD_SET : LD_RESET; #1;
      for (int p = 0; p < PARTS; p++)
        for (int i = 0; i < W; i++) begin
          line_drive_t e;
          e = (p == prog_part && i == prog_row) ? prog_kind : LD_0V;
          checks++;
          if (line[p][i] !== e) begin failures++; $display("FAIL prog p=%0d i=%0d", p, i); end
        end
      mode = MODE_IDLE;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
