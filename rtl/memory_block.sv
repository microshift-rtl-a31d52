// memory_block: line memory and template kernel of the compressor.
//
// Three W-stage line buffers in series hold the three image lines above the
// newest sample. Two 10-stage kernel rows sit beside them: row 0 is fed
// straight from the quantizer, row 3 from the output of the third line
// buffer, so row 3 holds the line three rows up. With the newest sample at
// column c+3 the pixel being coded, X, is at kernel stage 3 and
//     row 0:  X = stage 3, B = stage 6 (c-3), E = stage 9 (c-6)
//     row 3:  D = stage 0 (c+3), A = stage 3, C = stage 6, G = stage 9
// which is the causal template of subimage prediction (same pattern
// position, three pixels apart). This layout follows the paper's figure.
// In addition the block gives the 3x3 pattern tile that holds X (blk, row
// major): the lines one and two rows up come from the first stages of the
// second and third line buffers, the current line from kernel row 0.
// blk_ok marks tile samples that precede X in the tile (pattern position
// u < t) and lie inside the image; the inter-predictor uses only those.
// Template pixels outside the image read as 0 (a choice of this design).
// The kernel moves on every cycle with shift = 1. x_row/x_col give the
// position of the X now in the kernel; all outputs are combinational from
// the registers and the position inputs.
module memory_block
  import microshift_pkg::*;
#(
  parameter int W = 640,
  parameter int H = 480
) (
  input  logic                 clk,
  input  logic                 shift,
  input  qpix_t                q,        // newest sub-quantized sample
  input  logic [$clog2(H)-1:0] x_row,
  input  logic [$clog2(W)-1:0] x_col,
  input  logic [1:0]           x_row3,
  input  logic [1:0]           x_col3,
  output qpix_t                x, a, b, c, d, e, g,
  output logic [8:0][M_BITS-1:0] blk,
  output logic [8:0]           blk_ok
);
  localparam int TAPS = 6;

  qpix_t lb1_taps [TAPS], lb2_taps [TAPS], lb3_taps [TAPS];
  qpix_t lb1_out, lb2_out, lb3_out;
  qpix_t row0 [10], row3 [10];

  line_buffer #(.W(W), .TAPS(TAPS)) u_lb1 (.clk, .shift, .din(q),       .taps(lb1_taps), .dout(lb1_out));
  line_buffer #(.W(W), .TAPS(TAPS)) u_lb2 (.clk, .shift, .din(lb1_out), .taps(lb2_taps), .dout(lb2_out));
  line_buffer #(.W(W), .TAPS(TAPS)) u_lb3 (.clk, .shift, .din(lb2_out), .taps(lb3_taps), .dout(lb3_out));

  always_ff @(posedge clk) begin
    if (shift) begin
      row0[0] <= q;
      row3[0] <= lb3_out;
      for (int k = 1; k < 10; k++) begin
        row0[k] <= row0[k-1];
        row3[k] <= row3[k-1];
      end
    end
  end

  logic up_ok, left3_ok, left6_ok, right3_ok;
  always_comb begin
    up_ok     = x_row >= 3;
    left3_ok  = x_col >= 3;
    left6_ok  = x_col >= 6;
    right3_ok = (int'(x_col) + 3) < W;
    x = row0[3];
    b = left3_ok ? row0[6] : '0;
    e = left6_ok ? row0[9] : '0;
    a = up_ok ? row3[3] : '0;
    c = (up_ok && left3_ok) ? row3[6] : '0;
    d = (up_ok && right3_ok) ? row3[0] : '0;
    g = (up_ok && left6_ok) ? row3[9] : '0;
  end

  // 3x3 tile around X
  int t_x;
  assign t_x = 3 * int'(x_row3) + int'(x_col3);

  always_comb begin
    for (int u = 0; u < 9; u++) begin
      int dr, dc, k;
      dr = (u / 3) - int'(x_row3);
      dc = (u % 3) - int'(x_col3);
      k  = (3 - dc) % TAPS;
      case (dr)
        0:       blk[u] = (dc < 0) ? row0[k] : row0[3];
        -1:      blk[u] = lb2_taps[k];
        -2:      blk[u] = lb3_taps[k];
        default: blk[u] = '0;
      endcase
      blk_ok[u] = (u < t_x) && ((int'(x_col) + dc) < W);
    end
  end
endmodule
