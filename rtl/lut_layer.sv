// lut_layer: one weightless layer of NUM_LUTS lookup-table neurons.
//
// LUT i reads LUT_K bits of the input vector x. Which bits it reads is the
// layer's learned mapping, fixed after training, so it is plain wiring here:
// address bit k of LUT i is x[dwn_pkg::lut_src(i, k, IN_BITS)]. The LUT_K bits
// are concatenated into an address (bit k of the address is input k) and the
// LUT outputs entry "address" of its 2^LUT_K-bit truth table
// dwn_pkg::lut_table(i). There is no arithmetic: each neuron is one K-input
// Boolean function of constant shape.
//
// Interface and timing: purely combinational, x -> y. The pipeline register
// that follows it sits inside the popcount trees.
//
// LUT-4 neurons, a single layer and the learned (rather than random) mapping
// follow the source; the address bit order and the placeholder contents
// (see dwn_pkg) are this design's choices.
module lut_layer #(
  parameter int IN_BITS  = dwn_pkg::NUM_SIGNALS * dwn_pkg::WINDOW * dwn_pkg::THERM_BITS,
  parameter int NUM_LUTS = dwn_pkg::NUM_LUTS,
  parameter int LUT_K    = dwn_pkg::LUT_K
) (
  input  logic [IN_BITS-1:0]  x,
  output logic [NUM_LUTS-1:0] y
);

  for (genvar i = 0; i < NUM_LUTS; i++) begin : g_lut
    localparam logic [2**dwn_pkg::MAX_LUT_K-1:0] TABLE = dwn_pkg::lut_table(i);
    logic [LUT_K-1:0] addr;
    for (genvar k = 0; k < LUT_K; k++) begin : g_in
      localparam int SRC = dwn_pkg::lut_src(i, k, IN_BITS);
      assign addr[k] = x[SRC];
    end
    assign y[i] = TABLE[dwn_pkg::MAX_LUT_K'(addr)];
  end

endmodule
