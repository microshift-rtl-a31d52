// ms_quantizer: microshift sub-quantizer (first, lossy step of Microshift).
//
// Each 8-bit pixel receives the offset delta_t of its position t in the 3x3
// microshift pattern (t = 3*(row mod 3) + (col mod 3), offsets 0 4 7 / 11 14
// 18 / 21 25 28), the sum wraps modulo 256 instead of saturating, and the
// result is quantized to M = 3 bits by keeping its top bits (levels k*32).
// The wrap keeps bright pixels recoverable: an overflowing sum turns dark
// and the decoder can unwrap it from its unshifted neighbours.
// The modulo-256 shift and the 3-bit output follow the paper; taking the top
// bits as the quantizer is the direct reading of levels k*Delta.
// Purely combinational: q is valid in the same cycle as pix and pat_idx.
module ms_quantizer
  import microshift_pkg::*;
(
  input  logic [PIX_BITS-1:0] pix,      // raw pixel
  input  sub_t                pat_idx,  // pattern position 0..8
  output qpix_t               q         // sub-quantized micro-shifted value
);
  logic [PIX_BITS-1:0] shifted;

  always_comb begin
    shifted = pix + PIX_BITS'(shift_of(pat_idx));  // mod 256 by truncation
    q       = shifted[PIX_BITS-1 -: M_BITS];
  end
endmodule
