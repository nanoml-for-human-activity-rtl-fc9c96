// tb_popcount: streams random 37-bit vectors (with all-zero, all-one and
// gaps in in_valid) through the pipelined popcount and checks each count
// against $countones, and that it arrives exactly 4 clocks later: 6 adder
// levels with registers after levels 1, 3, 5 and 6 (LEVEL_OFFSET 1, two
// levels per stage).
module tb_popcount;
  localparam int WIDTH = 37, LAT = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [WIDTH-1:0] in_bits = '0;
  logic [5:0] count;
  int checks = 0, failures = 0;

  popcount #(.WIDTH(WIDTH), .LEVEL_OFFSET(1), .LEVELS_PER_STAGE(2)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic            vhist [$];
  int              chist [$];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      // check output of the vector sent LAT cycles ago
      if (vhist.size() == LAT) begin
        logic v; int c;
        v = vhist.pop_front(); c = chist.pop_front();
        checks++;
        if (out_valid !== v) begin failures++; $display("valid mismatch cycle %0d", cyc); end
        if (v) begin
          checks++;
          if (int'(count) != c) begin failures++; $display("count %0d exp %0d", count, c); end
        end
      end
      in_valid = ($urandom_range(0, 4) != 0) && cyc < 590;
      case (cyc % 50)
        0: in_bits = '0;
        1: in_bits = '1;
        default: in_bits = WIDTH'({$urandom, $urandom});
      endcase
      vhist.push_back(in_valid);
      chist.push_back($countones(in_bits));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
