// tb_lut_layer: drives random input vectors into a 50-LUT layer and checks
// every output against a lookup done here from the layer's mapping and truth
// tables (the model contents in dwn_pkg): address bit k = x[src(i,k)].
module tb_lut_layer;
  localparam int N_IN = 40, N_LUT = 50, K = 4;
  logic [N_IN-1:0]  x;
  logic [N_LUT-1:0] y;
  int checks = 0, failures = 0;

  lut_layer #(.IN_BITS(N_IN), .NUM_LUTS(N_LUT), .LUT_K(K)) dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones = 0;
    for (int it = 0; it < 300; it++) begin
      x = {$urandom, $urandom};
      if (it == 0) x = '0;
      if (it == 1) x = '1;
      #1;
      for (int i = 0; i < N_LUT; i++) begin
        int a;
        logic [255:0] tbl;
        a = 0;
        for (int k = 0; k < K; k++)
          a |= int'(x[dwn_pkg::lut_src(i, k, N_IN)]) << k;
        tbl = dwn_pkg::lut_table(i);
        checks++;
        if (y[i] !== tbl[a]) begin
          failures++;
          if (failures < 10) $display("LUT %0d addr %0d: got %b exp %b", i, a, y[i], tbl[a]);
        end
      end
      ones += $countones(y);
    end
    checks++;
    if (ones == 0 || ones == 300 * N_LUT) failures++;  // outputs must vary
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
