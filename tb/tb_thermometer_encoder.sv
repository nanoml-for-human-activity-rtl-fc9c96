// tb_thermometer_encoder: checks the thermometer code of every sample bit by
// bit against thresholds recomputed here (evenly spaced over the 16-bit
// range), including samples below all and above all thresholds, and checks
// the one-clock latency with gaps in in_valid.
module tb_thermometer_encoder;
  localparam int S = 2, T = 3, B = 5, W = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] samples [S][T];
  logic [S*T*B-1:0] code;
  int checks = 0, failures = 0;

  thermometer_encoder #(.NUM_SIGNALS(S), .WINDOW(T), .THERM_BITS(B), .SAMPLE_W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int thr(int j);
    return -32768 + ((j + 1) * 65536) / (B + 1);   // -21846, -10923, 0, 10922, 21845
  endfunction

  logic [S*T*B-1:0] exp_code;
  int n_low = 0, n_high = 0;

  initial begin
    for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) samples[s][t] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int s = 0; s < S; s++)
        for (int t = 0; t < T; t++) begin
          case ($urandom_range(0, 5))
            0: samples[s][t] = -16'sd32768;
            1: samples[s][t] = 16'sd32767;
            2: samples[s][t] = W'(thr($urandom_range(0, B - 1)));  // exactly on a threshold
            default: samples[s][t] = W'($urandom);
          endcase
          for (int j = 0; j < B; j++)
            exp_code[(s * T + t) * B + j] = (int'(samples[s][t]) > thr(j));
          if (int'(samples[s][t]) <= thr(0)) n_low++;
          if (int'(samples[s][t]) > thr(B - 1)) n_high++;
        end
      in_valid = (it % 7 != 3);
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("valid mismatch at %0d", it); end
      if (in_valid) begin
        checks++;
        if (code !== exp_code) begin
          failures++;
          $display("code mismatch %0d: got %h exp %h", it, code, exp_code);
        end
      end
    end
    checks++;
    if (n_low == 0 || n_high == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
