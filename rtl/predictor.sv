// predictor: intra- and inter-prediction of the sub-quantized pixel X.
//
// Subimage 1 (pattern position t = 0) is predicted from its own causal
// template: the texture context selects a dictionary entry D and
//     X^ = B + D        (D negated when the context was merged from -v),
// saturated to 0..7.
// Subimages 2..9 (t > 0) are predicted from the already coded samples of the
// same 3x3 pattern tile, which are much closer to X than its own subimage
// neighbours. Each such sample z_u (pattern position u) says the original
// pixel lay in [32 z_u - delta_u, 32 z_u - delta_u + 32). The estimate is the
// middle of the intersection of these ranges,
//     Dec = floor((max lower + min upper) / 2),
// and X is predicted by re-applying the encoder's own step to it:
//     X^ = Q(mod(Dec + delta_t, 256)) = top 3 bits.
// Both predictors follow the paper; the saturation of the intra prediction,
// the midpoint rule when the ranges do not overlap and the modulo wrap in the
// inter prediction are this design's choices.
// Purely combinational (dictionary read included).
module predictor
  import microshift_pkg::*;
#(
  parameter string DICT_FILE = ""
) (
  input  sub_t                   t,       // pattern position of X
  input  qpix_t                  b,
  input  ctx_t                   ctx,
  input  logic                   neg,
  input  logic [8:0][M_BITS-1:0] blk,
  input  logic [8:0]             blk_ok,
  output qpix_t                  xhat
);
  logic signed [3:0] dval;

  dict_rom #(.INIT_FILE(DICT_FILE)) u_dict (.addr(ctx), .data(dval));

  logic signed [5:0]  intra;
  logic signed [10:0] lo, hi, lo_u, est;
  logic [7:0]         wrapped;
  qpix_t              inter;

  always_comb begin
    // intra: B + (+-D), saturated
    intra = $signed({3'b000, b}) + (neg ? -6'(dval) : 6'(dval));
    // inter: heuristic decompression of the coded tile samples
    lo = -11'sd512;
    hi = 11'sd511;
    for (int u = 0; u < 9; u++) begin
      lo_u = $signed({3'b000, blk[u], 5'b00000}) - $signed({6'b000000, shift_of(4'(u))});
      if (blk_ok[u]) begin
        if (lo_u > lo) lo = lo_u;
        if (lo_u + 11'sd32 < hi) hi = lo_u + 11'sd32;
      end
    end
    est     = (lo + hi) >>> 1;
    wrapped = 8'(est + $signed({6'b000000, shift_of(t)}));
    inter   = wrapped[7:5];

    if (t == '0) begin
      if (intra < 0)                 xhat = '0;
      else if (intra > 6'sd7)        xhat = qpix_t'(MAX_VAL);
      else                           xhat = qpix_t'(intra);
    end else begin
      xhat = inter;
    end
  end
endmodule
