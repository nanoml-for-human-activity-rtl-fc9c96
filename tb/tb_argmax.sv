// tb_argmax: random class scores, many with ties, through the argmax; checks
// the winning index (lowest index on a tie), the maximum, the registered
// score copy and the one-clock latency.
module tb_argmax;
  localparam int C = 6, CW = 11;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [CW-1:0] scores [C];
  logic [2:0] class_idx;
  logic [CW-1:0] max_score;
  logic [CW-1:0] scores_q [C];
  int checks = 0, failures = 0, ties = 0;

  argmax #(.NUM_CLASSES(C), .CW(CW)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_idx, exp_max, nmax;
    logic [CW-1:0] sent [C];
    for (int c = 0; c < C; c++) scores[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++)
        scores[c] = (it % 2) ? CW'($urandom_range(0, 3)) : CW'($urandom);
      in_valid = (it % 5 != 4);
      // independent reference: find max, then the first index holding it
      exp_max = 0;
      for (int c = 0; c < C; c++) if (int'(scores[c]) > exp_max) exp_max = int'(scores[c]);
      exp_idx = -1; nmax = 0;
      for (int c = 0; c < C; c++)
        if (int'(scores[c]) == exp_max) begin nmax++; if (exp_idx < 0) exp_idx = c; end
      if (nmax > 1) ties++;
      sent = scores;
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) failures++;
      checks++;
      if (int'(class_idx) != exp_idx || int'(max_score) != exp_max) begin
        failures++;
        $display("it %0d: idx %0d max %0d, exp %0d %0d", it, class_idx, max_score, exp_idx, exp_max);
      end
      checks++;
      if (scores_q != sent) failures++;
    end
    checks++;
    if (ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
