// Self-checking test of memory_block: streams a random 3-bit image (W=8,
// H=7) with random gaps and, for every pixel X, compares the template pixels
// A..E, G and the valid 3x3 tile neighbours with a direct look-up in the
// image array (out-of-image template pixels must read 0).
module tb_memory_block;
  import microshift_pkg::*;
  localparam int W = 8, H = 7;
  logic clk = 0, shift = 0;
  qpix_t q = '0;
  logic [$clog2(H)-1:0] x_row = '0;
  logic [$clog2(W)-1:0] x_col = '0;
  logic [1:0] x_row3 = '0, x_col3 = '0;
  qpix_t x, a, b, c, d, e, g;
  logic [8:0][M_BITS-1:0] blk;
  logic [8:0] blk_ok;
  int img [H][W];
  int checks = 0, failures = 0;

  memory_block #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  function automatic int pix(int r, int cc);
    if (r < 0 || cc < 0 || cc >= W) return 0;
    return img[r][cc];
  endfunction

  task automatic check(input int got, input int expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d at (%0d,%0d)", what, got, expv, x_row, x_col);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < H; r++) for (int cc = 0; cc < W; cc++) img[r][cc] = $urandom % 8;
    for (int n = 0; n < W * H + 3; n++) begin
      while ($urandom % 3 == 0) @(negedge clk);   // gap
      @(negedge clk);
      shift = 1;
      q = (n < W * H) ? qpix_t'(img[n / W][n % W]) : '0;
      @(negedge clk);
      shift = 0;
      if (n >= 3) begin
        int xi, r, cc, t;
        xi = n - 3; r = xi / W; cc = xi % W;
        x_row = ($clog2(H))'(r); x_col = ($clog2(W))'(cc);
        x_row3 = 2'(r % 3); x_col3 = 2'(cc % 3);
        t = 3 * (r % 3) + cc % 3;
        #1;
        check(int'(x), img[r][cc], "X");
        check(int'(b), pix(r, cc - 3), "B");
        check(int'(e), pix(r, cc - 6), "E");
        check(int'(a), pix(r - 3, cc), "A");
        check(int'(c), pix(r - 3, cc - 3), "C");
        check(int'(d), pix(r - 3, cc + 3), "D");
        check(int'(g), pix(r - 3, cc - 6), "G");
        for (int u = 0; u < 9; u++) begin
          int rr, c2;
          rr = r - r % 3 + u / 3; c2 = cc - cc % 3 + u % 3;
          check(int'(blk_ok[u]), (u < t && c2 < W) ? 1 : 0, "blk_ok");
          if (u < t && c2 < W) check(int'(blk[u]), img[rr][c2], "blk");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
