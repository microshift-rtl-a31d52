// line_buffer: one W-stage shift register of 3-bit samples (one image line).
//
// On every cycle with shift high the input sample enters stage 0 and every
// stage moves one place on, so stage k holds the sample pushed k shifts ago
// and dout (stage W-1) is the sample of the same column one line earlier.
// Three of these in series form the line memory of the compressor, as in the
// paper's architecture. The first TAPS stages are also brought out: the
// inter-predictor reads the lines above inside the current 3x3 tile from
// them (the tap outputs are this implementation's choice).
// Timing: one cycle, outputs change only after a clock edge with shift = 1.
// The stages are not reset; the reader masks positions not yet written.
module line_buffer
  import microshift_pkg::*;
#(
  parameter int W    = 640,  // line length in pixels
  parameter int TAPS = 6     // number of leading stages brought out
) (
  input  logic  clk,
  input  logic  shift,
  input  qpix_t din,
  output qpix_t taps [TAPS],
  output qpix_t dout
);
  qpix_t stage [W];

  always_ff @(posedge clk) begin
    if (shift) begin
      stage[0] <= din;
      for (int k = 1; k < W; k++) stage[k] <= stage[k-1];
    end
  end

  always_comb begin
    for (int k = 0; k < TAPS; k++) taps[k] = stage[k];
    dout = stage[W-1];
  end
endmodule
