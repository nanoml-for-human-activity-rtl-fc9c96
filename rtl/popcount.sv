// popcount: pipelined population count (the activation of one class).
//
// Counts the ones in in_bits with a binary adder tree. Level 0 holds the
// input bits; adder level l adds neighbouring pairs of level l-1 (an odd node
// out passes through), so the tree has ceil(log2 WIDTH) adder levels. A
// register follows adder level l when (l + LEVEL_OFFSET) is a multiple of
// LEVELS_PER_STAGE, and always follows the last level. LEVEL_OFFSET counts
// the logic levels already in front of this tree since the last register; in
// the classifier the LUT layer is one such level, so LEVEL_OFFSET = 1 there.
//
// Interface and timing: in_bits/in_valid -> count/out_valid after
// LATENCY = dwn_pkg::popcount_stages(WIDTH, LEVEL_OFFSET, LEVELS_PER_STAGE)
// clocks (6 for the 1,667-bit groups of the default classifier). Fully
// pipelined: a new vector every clock. Only the valid bits are reset.
//
// That the class activation is a popcount follows the source; the adder-tree
// form and the register placement are this design's choices.
module popcount #(
  parameter int WIDTH            = 1667,
  parameter int LEVEL_OFFSET     = 1,
  parameter int LEVELS_PER_STAGE = dwn_pkg::LEVELS_PER_STAGE,
  localparam int CW      = $clog2(WIDTH + 1),
  localparam int DEPTH   = dwn_pkg::popcount_levels(WIDTH),
  localparam int LATENCY = dwn_pkg::popcount_stages(WIDTH, LEVEL_OFFSET, LEVELS_PER_STAGE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_bits,
  output logic             out_valid,
  output logic [CW-1:0]    count
);

  // Nodes at tree level l.
  function automatic int nodes(int l);
    return (WIDTH + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= DEPTH; l++) begin : g_lvl
    localparam int N = nodes(l);
    logic [CW-1:0] node [N];
    logic          v;

    if (l == 0) begin : g_leaf
      for (genvar j = 0; j < N; j++) begin : g_bit
        assign node[j] = CW'(in_bits[j]);
      end
      assign v = in_valid;
    end else begin : g_add
      localparam int NP = nodes(l - 1);
      logic [CW-1:0] sum [N];
      for (genvar j = 0; j < N; j++) begin : g_node
        if (2 * j + 1 < NP) begin : g_pair
          assign sum[j] = g_lvl[l-1].node[2*j] + g_lvl[l-1].node[2*j+1];
        end else begin : g_pass
          assign sum[j] = g_lvl[l-1].node[2*j];
        end
      end
      if (((l + LEVEL_OFFSET) % LEVELS_PER_STAGE) == 0 || l == DEPTH) begin : g_reg
        always_ff @(posedge clk) node <= sum;
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) v <= 1'b0;
          else        v <= g_lvl[l-1].v;
      end else begin : g_wire
        assign node = sum;
        assign v    = g_lvl[l-1].v;
      end
    end
  end

  assign count     = g_lvl[DEPTH].node[0];
  assign out_valid = g_lvl[DEPTH].v;

endmodule
