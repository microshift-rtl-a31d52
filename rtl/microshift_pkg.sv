// microshift_pkg: constants, types and helper functions shared by the
// Microshift compression core.
//
// The core sub-quantizes every 8-bit pixel to M = 3 bits after adding a
// position-dependent offset (the "microshift") taken from a 3x3 pattern, and
// then losslessly codes the nine interleaved subimages that share one offset.
// This package holds:
//   * the algorithm constants M = 3, N = 3 and T = 2 with 313 texture contexts
//     (these follow the published configuration);
//   * the 3x3 microshift pattern 0 4 7 / 11 14 18 / 21 25 28, which equals
//     round(t * 32 / 9) for t = 0..8 (row-major);
//   * the JPEG-LS run-index table J[] used by the adaptive run-length coder
//     (the run coder is a JPEG-LS style design choice of this implementation);
//   * the default dictionary formula used when no trained predictor table is
//     loaded (a choice of this implementation, see dict_rom);
//   * the structs that carry one pixel through the coding pipeline.
// There is no logic and no timing here.
package microshift_pkg;

  localparam int PIX_BITS  = 8;                 // raw pixel bit depth
  localparam int M_BITS    = 3;                 // sub-quantizer resolution M
  localparam int N_PAT     = 3;                 // pattern size N
  localparam int N_SUB     = N_PAT * N_PAT;     // number of subimages
  localparam int DELTA     = 256 >> M_BITS;     // quantization step, 32
  localparam int T_CTX     = 2;                 // texture quantization bound T
  localparam int N_CTX     = 313;               // merged context count
  localparam int CTX_BITS  = 9;
  localparam int MAX_VAL   = (1 << M_BITS) - 1; // 7
  localparam int CODE_BITS = 24;                // widest code of one pixel
  localparam int LEN_BITS  = 5;                 // 0..24
  localparam int RUN_BITS  = 16;                // run counter, 2^15 max segment

  typedef logic [M_BITS-1:0]   qpix_t;          // one sub-quantized sample
  typedef logic [3:0]          sub_t;           // subimage / pattern index 0..8
  typedef logic [CTX_BITS-1:0] ctx_t;

  // Microshift delta_t for pattern position t (row-major in the 3x3 tile).
  function automatic logic [4:0] shift_of(input logic [3:0] t);
    case (t)
      4'd0:    shift_of = 5'd0;
      4'd1:    shift_of = 5'd4;
      4'd2:    shift_of = 5'd7;
      4'd3:    shift_of = 5'd11;
      4'd4:    shift_of = 5'd14;
      4'd5:    shift_of = 5'd18;
      4'd6:    shift_of = 5'd21;
      4'd7:    shift_of = 5'd25;
      4'd8:    shift_of = 5'd28;
      default: shift_of = 5'd0;
    endcase
  endfunction

  // JPEG-LS run-length order J[RUNindex], RUNindex = 0..31.
  function automatic logic [3:0] run_j(input logic [4:0] idx);
    logic [3:0] j;
    if (idx < 5'd16)      j = 4'(idx >> 2);
    else if (idx < 5'd24) j = 4'd4 + 4'((idx - 5'd16) >> 1);
    else                  j = 4'd8 + 4'(idx - 5'd24);
    return j;
  endfunction

  // Balanced base-5 digit i (i = 0 is the least significant) of a context value.
  function automatic int ctx_digit(input int value, input int i);
    int v;
    v = value;
    for (int k = 0; k < i; k++) v = (v + 2 + 500) / 5 - 100;
    return ((v + 2 + 500) % 5) - 2;
  endfunction

  // Default dictionary entry: the first texture element q1 = Q(A - C) of the
  // context, i.e. the planar prediction X - B ~ A - C saturated to +-2.
  function automatic logic signed [3:0] default_dict(input int l);
    return 4'(ctx_digit(l, 3));
  endfunction

  // Pixel state after the texture stage.
  typedef struct packed {
    logic        valid;
    logic        last;      // last pixel of the frame
    logic        eol;       // last pixel of its subimage row
    sub_t        t;         // pattern position = subimage index - 1
    qpix_t       x;
    qpix_t       b;
    ctx_t        ctx;
    logic        neg;       // context was merged from -v
    logic        flat;
    logic [8:0][M_BITS-1:0] blk;    // 3x3 tile samples, row-major
    logic [8:0]  blk_ok;    // tile sample is an already coded neighbour
  } s1_t;

  // Pixel state after the prediction stage.
  typedef struct packed {
    logic        valid;
    logic        last;
    logic        eol;
    sub_t        t;
    qpix_t       x;
    qpix_t       xhat;
    logic        flat;
    logic        hit;       // X equals B (run continues)
  } s2_t;

  // Pixel state after the error mapping stage.
  typedef struct packed {
    logic        valid;
    logic        last;
    logic        eol;
    sub_t        t;
    qpix_t       emap;
    logic        flat;
    logic        hit;
  } s3_t;

  // Code of one pixel, ready for its subimage's bit packer.
  typedef struct packed {
    logic                 valid;
    logic                 last;
    sub_t                 t;
    logic [CODE_BITS-1:0] bits;   // right-aligned, first bit is bits[len-1]
    logic [LEN_BITS-1:0]  len;
  } s4_t;

endpackage
