// thermometer_encoder: distributive thermometer front end of the classifier.
//
// Every raw sample x of signal s is compared with that signal's THERM_BITS
// ascending thresholds t[s][0] < t[s][1] < ...; code bit j is 1 when x > t[s][j].
// A larger sample therefore lights a longer run of ones starting at bit 0
// (a reading of 3 on a 5-level scale gives 1,1,1,0,0). The codes of all
// samples are concatenated into one flat vector, in the order
//   bit index = (s * WINDOW + t) * THERM_BITS + j
// (signal-major, then time step, then thermometer bit), and that vector is
// registered. This register is the first pipeline stage of the classifier.
//
// Interface: samples[s][t] are signed SAMPLE_W-bit words qualified by
// in_valid; code/out_valid appear one clock later. A new window may be
// presented every clock. Only the valid bit is reset (active-low,
// asynchronous); the data register is not.
//
// The use of 20-bit distributive thermometer codes per raw signal follows the
// source; the word format, the flattening order and the strict ">" compare are
// this design's choices. Thresholds come from dwn_pkg::therm_threshold() and
// are elaboration-time constants, so each compare is against a constant.
module thermometer_encoder #(
  parameter int NUM_SIGNALS = dwn_pkg::NUM_SIGNALS,
  parameter int WINDOW      = dwn_pkg::WINDOW,
  parameter int THERM_BITS  = dwn_pkg::THERM_BITS,
  parameter int SAMPLE_W    = dwn_pkg::SAMPLE_W,
  localparam int OUT_BITS   = NUM_SIGNALS * WINDOW * THERM_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] samples [NUM_SIGNALS][WINDOW],
  output logic                       out_valid,
  output logic [OUT_BITS-1:0]        code
);

  logic [OUT_BITS-1:0] code_d;

  for (genvar s = 0; s < NUM_SIGNALS; s++) begin : g_sig
    for (genvar j = 0; j < THERM_BITS; j++) begin : g_thr
      localparam logic signed [SAMPLE_W-1:0] THR =
        SAMPLE_W'(dwn_pkg::therm_threshold(s, j, THERM_BITS, SAMPLE_W));
      for (genvar t = 0; t < WINDOW; t++) begin : g_t
        assign code_d[(s * WINDOW + t) * THERM_BITS + j] = (samples[s][t] > THR);
      end
    end
  end

  always_ff @(posedge clk) code <= code_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
