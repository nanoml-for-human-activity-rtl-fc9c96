// tb_dwn_har_full: the classifier at its default size (9 signals x 128 steps
// x 20-bit thermometer codes = 23,040 input bits, 10,000 LUT-4s, 6 classes).
// Sends four windows back to back, then one after a gap, and checks each
// predicted class and all six class scores against a reference model
// computed here, and that each result appears exactly 8 clocks after its
// window with one result per clock.
module tb_dwn_har_full;
  localparam int S = 9, T = 128, B = 20, NL = 10000, K = 4, C = 6;
  localparam int G = (NL + C - 1) / C, LAT = 8, IN = S * T * B, NWIN = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] samples [S][T];
  logic [2:0] class_idx;
  logic [10:0] class_scores [C];
  int checks = 0, failures = 0;

  dwn_har_top dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int thr(int j);
    return -32768 + ((j + 1) * 65536) / (B + 1);
  endfunction

  int exp_cls [NWIN];
  int exp_sc  [NWIN][C];
  int sent_at [NWIN];

  task automatic make_window(int w);
    logic [IN-1:0] x;
    for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) begin
      samples[s][t] = 16'($urandom);
      for (int j = 0; j < B; j++) x[(s * T + t) * B + j] = (int'(samples[s][t]) > thr(j));
    end
    for (int c = 0; c < C; c++) exp_sc[w][c] = 0;
    for (int i = 0; i < NL; i++) begin
      int a; logic [255:0] tbl;
      a = 0;
      for (int k = 0; k < K; k++) a |= int'(x[dwn_pkg::lut_src(i, k, IN)]) << k;
      tbl = dwn_pkg::lut_table(i);
      if (tbl[a]) exp_sc[w][i / G]++;
    end
    exp_cls[w] = 0;
    for (int c = 1; c < C; c++) if (exp_sc[w][c] > exp_sc[w][exp_cls[w]]) exp_cls[w] = c;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : drive
    for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) samples[s][t] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < NWIN; w++) begin
      if (w == 4) begin in_valid = 0; @(negedge clk); end
      make_window(w);
      in_valid = 1;
      sent_at[w] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
  end

  initial begin : monitor
    int got;
    got = 0;
    while (got < NWIN) begin
      @(negedge clk);
      if (out_valid) begin
        checks++;
        if (cyc - sent_at[got] != LAT) begin
          failures++; $display("window %0d latency %0d", got, cyc - sent_at[got]);
        end
        checks++;
        if (int'(class_idx) != exp_cls[got]) begin
          failures++; $display("window %0d class %0d exp %0d", got, class_idx, exp_cls[got]);
        end
        for (int c = 0; c < C; c++) begin
          checks++;
          if (int'(class_scores[c]) != exp_sc[got][c]) begin
            failures++; $display("window %0d score[%0d] %0d exp %0d", got, c, class_scores[c], exp_sc[got][c]);
          end
        end
        $display("window %0d: class %0d scores %0d %0d %0d %0d %0d %0d", got, class_idx,
                 class_scores[0], class_scores[1], class_scores[2], class_scores[3], class_scores[4], class_scores[5]);
        got++;
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
