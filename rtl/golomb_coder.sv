// golomb_coder: Golomb-Rice code of a mapped residual, read from a code table.
//
// A value v is sent as q = v >> K zeros, a one, and the K low bits of v, so
// its length is q + 1 + K. With the default K = 0 the code is unary: a zero
// residual costs one bit, v costs v + 1 bits (at most 8). The eight code
// words and lengths are held in a small table filled at elaboration from
// that rule, standing for the code ROM of the architecture. Golomb coding
// and a stored code table follow the paper; the parameter K = 0 and the bit
// order (bits[len-1] first, right-aligned) are this design's choices.
// Purely combinational.
module golomb_coder
  import microshift_pkg::*;
#(
  parameter int K = 0
) (
  input  qpix_t                emap,
  output logic [7:0]           bits,
  output logic [LEN_BITS-1:0]  len
);
  typedef struct packed {
    logic [7:0]          bits;
    logic [LEN_BITS-1:0] len;
  } gcode_t;

  function automatic gcode_t make_code(input int v);
    gcode_t g;
    g.bits = 8'((1 << K) | (v & ((1 << K) - 1)));
    g.len  = LEN_BITS'((v >> K) + 1 + K);
    return g;
  endfunction

  gcode_t rom [8];
  always_comb for (int v = 0; v < 8; v++) rom[v] = make_code(v);

  assign bits = rom[emap].bits;
  assign len  = rom[emap].len;
endmodule
