// Full-size test: one 640 x 480 frame through microshift_top at its default
// parameters. The image is a synthetic scene (smooth gradients, a saturated
// sky band, a flat region, a textured patch and sharp edges) generated here.
// Every word of the nine subimage streams is compared with the software
// model in ms_ref_pkg, and the compression time must be H*W + 8 cycles.
module tb_microshift_full;
  import microshift_pkg::*;
  import ms_ref_pkg::*;

  localparam int W = 640, H = 480;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [7:0] in_pixel = '0;
  logic out_valid, out_ready = 1, out_last, tx_abort = 0;
  logic [31:0] out_data;
  logic [3:0] out_sub;
  logic frame_done, tx_done, tx_aborted;
  logic [8:0] fifo_overflow;

  microshift_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  ms_ref model;
  int img [];
  logic [31:0] got [9][$];
  logic        got_last [9][$];
  int cycle = 0, first_cycle = -1, done_cycle = -1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (in_valid && in_ready && first_cycle < 0) first_cycle = cycle;
      if (frame_done) done_cycle = cycle;
      if (out_valid && out_ready) begin
        got[out_sub].push_back(out_data);
        got_last[out_sub].push_back(out_last);
      end
    end
  end

  initial begin
    int total_bits;
    model = new(W, H);
    img = new[W * H];
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int v;
      if (r < 80)                         v = 250 + (c % 6);            // bright sky
      else if (c < 200)                   v = 60;                       // flat wall
      else if (r > 300 && c > 400)        v = 128 + 40 * ((r / 4 + c / 4) % 2) + int'($urandom % 5);
      else                                v = (r + 2 * c) / 4 + int'($urandom % 3);
      img[r * W + c] = v > 255 ? 255 : v;
    end
    model.encode(img);
    total_bits = 0;
    for (int s = 0; s < 9; s++) total_bits += model.bits[s].size();
    $display("model: %0d bits, %0.3f bit/pixel, wraps %0d, run pixels %0d", total_bits,
             real'(total_bits) / (W * H), model.n_wrap, model.n_run_pix);

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < W * H; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_pixel = 8'(img[n]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    @(negedge clk); in_valid = 0;
    while (!tx_done) @(posedge clk);
    @(posedge clk);

    check(done_cycle - first_cycle == W * H + 8, $sformatf("H*W+8 cycles (%0d)", done_cycle - first_cycle));
    check(fifo_overflow == '0, "no FIFO overflow");
    for (int s = 0; s < 9; s++) begin
      check(got[s].size() == model.words[s].size(), $sformatf("sub %0d word count %0d vs %0d", s, got[s].size(), model.words[s].size()));
      for (int k = 0; k < got[s].size() && k < model.words[s].size(); k++) begin
        check(got[s][k] == model.words[s][k], $sformatf("sub %0d word %0d", s, k));
        check(got_last[s][k] == (k == model.words[s].size() - 1), "last flag");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
