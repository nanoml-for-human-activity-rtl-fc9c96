// tb_dwn_har_top: end-to-end test of the classifier at a reduced size
// (3 signals x 4 steps x 5 thermometer bits = 60 input bits, 40 LUT-4s,
// 6 classes of 7 LUTs, the last one padded with 2 zeros).
//
// A reference model written here encodes each window (thresholds evenly
// spaced over the 16-bit range), evaluates every LUT from the model contents
// in dwn_pkg, counts ones per class and takes the first maximum. Windows are
// streamed with random gaps; each result must appear exactly LAT = 4 clocks
// after its window (encoder 1 + popcount 2 + argmax 1). It also counts the
// mechanisms the design has and fails if one never happened: back-to-back
// windows, pipeline bubbles, argmax ties, samples below the lowest and above
// the highest threshold, and a reset in the middle of traffic.
module tb_dwn_har_top;
  localparam int S = 3, T = 4, B = 5, W = 16, NL = 40, K = 4, C = 6;
  localparam int G = (NL + C - 1) / C, LAT = 4, IN = S * T * B;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] samples [S][T];
  logic [2:0] class_idx;
  logic [2:0] class_scores [C];
  int checks = 0, failures = 0;
  int n_b2b = 0, n_bubble = 0, n_tie = 0, n_low = 0, n_high = 0, n_reset = 0;

  dwn_har_top #(.NUM_SIGNALS(S), .WINDOW(T), .THERM_BITS(B), .SAMPLE_W(W),
                .NUM_LUTS(NL), .LUT_K(K), .NUM_CLASSES(C)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int thr(int j);
    return -32768 + ((j + 1) * 65536) / (B + 1);
  endfunction

  typedef struct { logic v; int cls; int sc[C]; } res_t;
  res_t hist [$];

  function automatic res_t model(logic v);
    res_t r;
    logic [IN-1:0] x;
    int best;
    r.v = v;
    for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) for (int j = 0; j < B; j++)
      x[(s * T + t) * B + j] = (int'(samples[s][t]) > thr(j));
    for (int c = 0; c < C; c++) r.sc[c] = 0;
    for (int i = 0; i < NL; i++) begin
      int a; logic [255:0] tbl;
      a = 0;
      for (int k = 0; k < K; k++) a |= int'(x[dwn_pkg::lut_src(i, k, IN)]) << k;
      tbl = dwn_pkg::lut_table(i);
      if (tbl[a]) r.sc[i / G]++;
    end
    best = 0;
    for (int c = 1; c < C; c++) if (r.sc[c] > r.sc[best]) best = c;
    r.cls = best;
    return r;
  endfunction

  initial begin
    logic prev_v;
    prev_v = 0;
    for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) samples[s][t] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 1500; cyc++) begin
      @(negedge clk);
      if (cyc == 700) begin
        // reset in the middle of traffic: everything in flight is dropped
        rst_n = 0; hist.delete(); n_reset++;
        @(negedge clk);
        checks++;
        if (out_valid !== 1'b0) failures++;
        rst_n = 1;
      end
      if (hist.size() == LAT) begin
        res_t e;
        e = hist.pop_front();
        checks++;
        if (out_valid !== e.v) begin failures++; $display("cycle %0d valid %b exp %b", cyc, out_valid, e.v); end
        if (e.v) begin
          int nmax;
          checks++;
          if (int'(class_idx) != e.cls) begin failures++; $display("cycle %0d class %0d exp %0d", cyc, class_idx, e.cls); end
          for (int c = 0; c < C; c++) begin
            checks++;
            if (int'(class_scores[c]) != e.sc[c]) failures++;
          end
          nmax = 0;
          for (int c = 0; c < C; c++) if (e.sc[c] == e.sc[e.cls]) nmax++;
          if (nmax > 1) n_tie++;
        end
      end
      in_valid = ($urandom_range(0, 3) != 0) && cyc < 1490;
      for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) begin
        case ($urandom_range(0, 9))
          0: samples[s][t] = -16'sd32000;
          1: samples[s][t] = 16'sd32000;
          default: samples[s][t] = W'($urandom);
        endcase
        if (in_valid && int'(samples[s][t]) <= thr(0)) n_low++;
        if (in_valid && int'(samples[s][t]) > thr(B - 1)) n_high++;
      end
      if (in_valid && prev_v) n_b2b++;
      if (!in_valid && prev_v) n_bubble++;
      prev_v = in_valid;
      hist.push_back(model(in_valid));
    end
    $display("mechanisms: back-to-back=%0d bubbles=%0d ties=%0d below=%0d above=%0d resets=%0d",
             n_b2b, n_bubble, n_tie, n_low, n_high, n_reset);
    checks++; if (n_b2b == 0) failures++;
    checks++; if (n_bubble == 0) failures++;
    checks++; if (n_tie == 0) failures++;
    checks++; if (n_low == 0 || n_high == 0) failures++;
    checks++; if (n_reset == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
