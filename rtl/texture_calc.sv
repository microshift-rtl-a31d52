// texture_calc: texture vector, context index and flat-region detector.
//
// From the causal template of X it forms the texture vector
//     v = (A - C, C - B, D - A, B - E)
// and quantizes each element to one of the 2T+1 = 5 levels -2..2 by
// saturation. The four levels are read as a balanced base-5 number
// s = 125 q1 + 25 q2 + 5 q3 + q4 (-312..312). A vector and its negation are
// one context: ctx = |s| (0..312, 313 contexts) and neg = (s < 0) tells the
// predictor to negate the dictionary entry. flat is set when all four
// levels are zero, which sends the pixel to run mode.
// The texture vector, T = 2 and the 313 merged contexts follow the paper;
// saturation as the element quantizer, the base-5 numbering and the
// all-zero flat test are this implementation's reading of it.
// Purely combinational.
module texture_calc
  import microshift_pkg::*;
(
  input  qpix_t a, b, c, d, e,
  output ctx_t  ctx,
  output logic  neg,
  output logic  flat
);
  function automatic logic signed [2:0] quant(input logic signed [4:0] diff);
    if (diff > 5'sd2)       return 3'sd2;
    else if (diff < -5'sd2) return -3'sd2;
    else                    return 3'(diff);
  endfunction

  logic signed [2:0]  q1, q2, q3, q4;
  logic signed [10:0] s;

  always_comb begin
    q1 = quant($signed({2'b00, a}) - $signed({2'b00, c}));
    q2 = quant($signed({2'b00, c}) - $signed({2'b00, b}));
    q3 = quant($signed({2'b00, d}) - $signed({2'b00, a}));
    q4 = quant($signed({2'b00, b}) - $signed({2'b00, e}));
    s  = 11'sd125 * 11'(q1) + 11'sd25 * 11'(q2) + 11'sd5 * 11'(q3) + 11'(q4);
    neg  = s < 0;
    ctx  = CTX_BITS'(neg ? -s : s);
    flat = (q1 == 0) && (q2 == 0) && (q3 == 0) && (q4 == 0);
  end
endmodule
