// dwn_har_top: DWN human-activity classifier, one window per clock.
//
// Data path (one pipeline, no stalls):
//   samples --thermometer_encoder--> code (registered, stage 1)
//           --lut_layer-----------> NUM_LUTS LUT outputs (combinational)
//           --popcount x classes--> class activations (pipelined adder trees)
//           --argmax--------------> predicted class (registered)
// The LUT outputs are split into NUM_CLASSES contiguous groups of
// GROUP = ceil(NUM_LUTS / NUM_CLASSES) outputs; class c owns outputs
// [c*GROUP, (c+1)*GROUP), and the last group is padded with zeros when
// NUM_LUTS is not a multiple of NUM_CLASSES (10,000 = 5 x 1,667 + 1,665).
// The activation of class c is the number of ones in its group.
//
// Timing: one register after the encoder, one after every two logic levels
// of LUT layer plus adder tree (the LUT layer counts as the first level),
// and one after the argmax. With the defaults the adder trees have 11 levels,
// giving LATENCY = 1 + 6 + 1 = 8 clocks; with NUM_LUTS = 20000 they have 12
// levels and LATENCY = 9. Throughput is one window per clock; in_valid may
// be held high indefinitely and there is no back-pressure. The activations
// are also output, aligned with class_idx.
//
// Follows the source: distributive thermometer inputs (9 signals x 128 steps
// x 20 bits), a single layer of LUT-4 neurons with a learned fixed mapping,
// popcount per class, one inference per clock, about 8 clocks of latency at
// 10,000 LUTs. This design's own choices: the grouping of LUTs into classes,
// the register placement, the argmax tie rule (lowest index), the reset of
// valid bits only, and the placeholder model contents in dwn_pkg.
module dwn_har_top #(
  parameter int NUM_SIGNALS      = dwn_pkg::NUM_SIGNALS,
  parameter int WINDOW           = dwn_pkg::WINDOW,
  parameter int THERM_BITS       = dwn_pkg::THERM_BITS,
  parameter int SAMPLE_W         = dwn_pkg::SAMPLE_W,
  parameter int NUM_LUTS         = dwn_pkg::NUM_LUTS,
  parameter int LUT_K            = dwn_pkg::LUT_K,
  parameter int NUM_CLASSES      = dwn_pkg::NUM_CLASSES,
  parameter int LEVELS_PER_STAGE = dwn_pkg::LEVELS_PER_STAGE,
  localparam int IN_BITS = NUM_SIGNALS * WINDOW * THERM_BITS,
  localparam int GROUP   = (NUM_LUTS + NUM_CLASSES - 1) / NUM_CLASSES,
  localparam int CW      = $clog2(GROUP + 1),
  localparam int IW      = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int LATENCY = 2 + dwn_pkg::popcount_stages(GROUP, 1, LEVELS_PER_STAGE)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] samples [NUM_SIGNALS][WINDOW],
  output logic                       out_valid,
  output logic [IW-1:0]              class_idx,
  output logic [CW-1:0]              class_scores [NUM_CLASSES]
);

  logic                    code_valid;
  logic [IN_BITS-1:0]      code;
  logic [NUM_LUTS-1:0]     lut_out;
  logic [GROUP*NUM_CLASSES-1:0] lut_padded;
  logic [NUM_CLASSES-1:0]  pc_valid;
  logic [CW-1:0]           pc_count [NUM_CLASSES];
  logic [CW-1:0]           max_score;

  thermometer_encoder #(
    .NUM_SIGNALS (NUM_SIGNALS),
    .WINDOW      (WINDOW),
    .THERM_BITS  (THERM_BITS),
    .SAMPLE_W    (SAMPLE_W)
  ) u_encoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .samples   (samples),
    .out_valid (code_valid),
    .code      (code)
  );

  lut_layer #(
    .IN_BITS  (IN_BITS),
    .NUM_LUTS (NUM_LUTS),
    .LUT_K    (LUT_K)
  ) u_layer (
    .x (code),
    .y (lut_out)
  );

  assign lut_padded = (GROUP * NUM_CLASSES)'(lut_out);

  for (genvar c = 0; c < NUM_CLASSES; c++) begin : g_class
    popcount #(
      .WIDTH            (GROUP),
      .LEVEL_OFFSET     (1),
      .LEVELS_PER_STAGE (LEVELS_PER_STAGE)
    ) u_popcount (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (code_valid),
      .in_bits   (lut_padded[c*GROUP +: GROUP]),
      .out_valid (pc_valid[c]),
      .count     (pc_count[c])
    );
  end

  argmax #(
    .NUM_CLASSES (NUM_CLASSES),
    .CW          (CW)
  ) u_argmax (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (pc_valid[0]),
    .scores    (pc_count),
    .out_valid (out_valid),
    .class_idx (class_idx),
    .max_score (max_score),
    .scores_q  (class_scores)
  );

  // All class trees have the same depth, so their valid bits move together.
  a_valid_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    pc_valid == {NUM_CLASSES{pc_valid[0]}})
    else $error("popcount valid bits out of step: %b", pc_valid);

endmodule
