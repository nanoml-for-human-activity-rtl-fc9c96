// dwn_pkg: shared constants, sizing helpers and model contents of the DWN
// (Differentiable Weightless Neural Network) human-activity classifier.
//
// Sizes. The defaults describe the main configuration: 9 raw inertial
// signals (3-axis body acceleration, 3-axis gyroscope, 3-axis total
// acceleration) sampled over a 128-step window, each sample turned into a
// 20-bit distributive thermometer code, one layer of 10,000 LUT-4 neurons and
// 6 activity classes. The 16-bit signed sample format is this design's own
// choice; the source leaves the sensor word format open.
//
// Model contents. A trained DWN is fully described by three tables: the input
// bits each LUT reads (the learned mapping), the 2^K-bit truth table of each
// LUT, and the thermometer thresholds of each signal. The trained tables are
// not public, so the functions below compute deterministic placeholder
// contents from an integer hash (the "lowbias32" mixer):
//   lut_src(i, k, n)   = mix32(MAP_SEED ^ mix32(i*8 + k)) mod n
//   lut_table(i)[32w+:32] = mix32(TABLE_SEED ^ mix32(i*8 + w)),  w = 0..7
//   therm_threshold(s, j) = -2^(W-1) + (j+1) * 2^W / (B+1)
// The thresholds are the quantiles of a uniform distribution over the sample
// range, i.e. what a distributive thermometer would pick for uniformly spread
// data. To deploy a trained model, replace the bodies of these three
// functions (for example with case tables); nothing else changes.
//
// Pipeline timing helper. The popcount adder trees put a register after every
// LEVELS_PER_STAGE logic levels, counting the LUT layer as the level in front
// of the first adder level; popcount_stages() returns how many register
// stages such a tree has.
package dwn_pkg;

  // ---- main configuration ----
  localparam int NUM_SIGNALS      = 9;
  localparam int WINDOW           = 128;
  localparam int THERM_BITS       = 20;
  localparam int SAMPLE_W         = 16;
  localparam int NUM_LUTS         = 10000;
  localparam int LUT_K            = 4;
  localparam int NUM_CLASSES      = 6;
  localparam int LEVELS_PER_STAGE = 2;
  localparam int MAX_LUT_K        = 8;   // truth tables are held as 256-bit words

  // Activity classes of the UCI-HAR label set, in label order.
  typedef enum logic [2:0] {
    WALKING            = 3'd0,
    WALKING_UPSTAIRS   = 3'd1,
    WALKING_DOWNSTAIRS = 3'd2,
    SITTING            = 3'd3,
    STANDING           = 3'd4,
    LAYING             = 3'd5
  } activity_e;

  localparam int unsigned MAP_SEED   = 32'h1F2E_3D4C;
  localparam int unsigned TABLE_SEED = 32'h9E37_79B9;

  // 32-bit integer hash (lowbias32).
  function automatic int unsigned mix32(int unsigned x);
    int unsigned h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Index of the input bit that feeds address bit k of LUT i (learned mapping).
  function automatic int unsigned lut_src(int unsigned i, int unsigned k, int unsigned n_inputs);
    return mix32(MAP_SEED ^ mix32(i * 8 + k)) % n_inputs;
  endfunction

  // Truth table of LUT i; entry a is bit a (only the low 2^K bits are used).
  function automatic logic [2**MAX_LUT_K-1:0] lut_table(int unsigned i);
    logic [2**MAX_LUT_K-1:0] t;
    for (int w = 0; w < 2**MAX_LUT_K / 32; w++)
      t[32*w +: 32] = mix32(TABLE_SEED ^ mix32(i * 8 + w));
    return t;
  endfunction

  // Threshold j (0 = lowest) of signal s for a B-bit thermometer over W-bit
  // signed samples. Placeholder: identical for every signal.
  function automatic int therm_threshold(int s, int j, int b, int w);
    longint span;
    span = longint'(1) << w;
    return int'(-(span / 2) + ((longint'(j) + 64'sd1) * span) / (longint'(b) + 64'sd1));
  endfunction

  // Number of adder levels of a popcount tree over `width` bits.
  function automatic int popcount_levels(int width);
    return (width < 2) ? 1 : $clog2(width);
  endfunction

  // Register stages of a popcount tree: a register follows adder level l
  // when (l + offset) is a multiple of lps, and always follows the last level.
  function automatic int popcount_stages(int width, int offset, int lps);
    int d;
    int s;
    d = popcount_levels(width);
    s = 0;
    for (int l = 1; l <= d; l++)
      if (((l + offset) % lps) == 0 || l == d) s++;
    return s;
  endfunction

endpackage
