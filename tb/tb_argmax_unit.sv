// tb_argmax_unit: feeds random score sets (with forced ties) into the argmax
// unit in class order and checks the winning class, its score and the stored
// score table; a tie must go to the lowest class number.
`timescale 1ns/1ps
module tb_argmax_unit;
  import rflearn_pkg::*;
  localparam int NCLS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, we;
  logic [2:0] idx, best;
  data_t sc, best_score;
  data_t scores [NCLS];

  argmax_unit #(.NCLS(NCLS)) dut (.clk, .rst_n, .clear, .score_we(we), .score_idx(idx),
                                  .score(sc), .best_class(best), .best_score, .scores);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int v[NCLS];
    int e;
    clear = 0; we = 0; idx = 0; sc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int k = 0; k < NCLS; k++) v[k] = int'($urandom_range(65535)) - 32768;
      if (n % 3 == 0) v[$urandom_range(NCLS - 1)] = v[$urandom_range(NCLS - 1)];
      if (n % 7 == 0) foreach (v[k]) v[k] = -32768;
      e = 0;
      for (int k = 1; k < NCLS; k++) if (v[k] > v[e]) e = k;
      for (int k = 0; k < NCLS; k++) begin
        we = 1; idx = 3'(k); sc = data_t'(v[k]);
        @(negedge clk);
        we = 0;
        if ($urandom_range(1)) @(negedge clk);
      end
      check(int'(best) == e, $sformatf("class %0d expected %0d", best, e));
      check(int'(best_score) == v[e], "best score");
      for (int k = 0; k < NCLS; k++) check(int'(scores[k]) == v[k], "score table");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
