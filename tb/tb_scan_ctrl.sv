// Self-checking test of scan_ctrl: two small frames with random input gaps.
// Checks the pattern position of every accepted pixel, the raster order of
// the X positions, that X trails the input by three shifts, the three flush
// shifts, x_last, and that in_ready stays low until tx_done.
module tb_scan_ctrl;
  import microshift_pkg::*;
  localparam int W = 7, H = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, tx_done = 0;
  logic in_ready, accept, frame_start, shift, x_new, x_last;
  sub_t in_t;
  logic [$clog2(H)-1:0] x_row;
  logic [$clog2(W)-1:0] x_col;
  logic [1:0] x_row3, x_col3;
  int checks = 0, failures = 0;
  int n_in, n_x, n_shift, n_flush;

  scan_ctrl #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (accept) begin
      check(int'(in_t) == 3 * ((n_in / W) % 3) + (n_in % W) % 3, "in_t");
      check(frame_start == (n_in == 0), "frame_start");
      n_in++;
    end
    if (x_new) begin
      check(int'(x_row) == n_x / W && int'(x_col) == n_x % W, "x position");
      check(int'(x_row3) == (n_x / W) % 3 && int'(x_col3) == (n_x % W) % 3, "x mod 3");
      check(x_last == (n_x == W * H - 1), "x_last");
      check(n_shift == n_x + 4, "X lags input by three shifts");
      n_x++;
    end
    if (shift) begin
      n_shift++;
      if (!accept) n_flush++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      n_in = 0; n_x = 0; n_shift = 0; n_flush = 0;
      while (n_in < W * H) begin
        @(negedge clk);
        in_valid = ($urandom % 3) != 0;
        @(posedge clk); #1;
      end
      @(negedge clk); in_valid = 1;     // sensor keeps offering pixels
      repeat (20) @(posedge clk);
      #1;
      check(n_in == W * H, "no pixel accepted while holding");
      check(n_x == W * H, "all X positions seen");
      check(n_flush == 3, "three flush shifts");
      check(!in_ready, "in_ready low until tx_done");
      @(negedge clk); in_valid = 0; tx_done = 1;
      @(negedge clk); tx_done = 0;
      check(in_ready, "in_ready back after tx_done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
