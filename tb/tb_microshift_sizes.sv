// Frame-size test: the other image sizes the compression scheme was built
// for, each on its own microshift_top instance, all running at once:
//   256 x 256   (small sensor configuration)
//   512 x 512   (size of the standard still test images)
//   1280 x 720  (HD configuration, FIFO_DEPTH raised to 16384 words)
// Each instance compresses one synthetic frame scaled to its size (a bright
// band that wraps in the quantizer, a flat wall, a gradient with noise, a
// textured patch and hard edges). Every word, subimage tag and last flag is
// compared with the software model in ms_ref_pkg, the compression time must
// be H*W + 8 cycles, and no FIFO may overflow. The output of every instance
// sees random back-pressure.
module tb_microshift_sizes;
  import microshift_pkg::*;
  import ms_ref_pkg::*;

  localparam int NCFG = 3;
  localparam int CW [NCFG] = '{256, 512, 1280};
  localparam int CH [NCFG] = '{256, 512, 720};
  localparam int CD [NCFG] = '{4096, 4096, 16384};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  bit finished [NCFG];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle++;

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int W = CW[g], H = CH[g];

    logic in_valid = 0, in_ready;
    logic [7:0] in_pixel = '0;
    logic out_valid, out_ready = 0, out_last, tx_abort = 0;
    logic [31:0] out_data;
    logic [3:0] out_sub;
    logic frame_done, tx_done, tx_aborted;
    logic [8:0] fifo_overflow;

    microshift_top #(.W(W), .H(H), .FIFO_DEPTH(CD[g])) dut (.*);

    ms_ref model;
    int img [];
    logic [31:0] got [9][$];
    logic        got_last [9][$];
    int first_cycle = -1, done_cycle = -1;

    always @(posedge clk)
      if (rst_n) begin
        if (in_valid && in_ready && first_cycle < 0) first_cycle = cycle;
        if (frame_done) done_cycle = cycle;
        if (out_valid && out_ready) begin
          got[out_sub].push_back(out_data);
          got_last[out_sub].push_back(out_last);
        end
      end

    always @(negedge clk) out_ready = ($urandom % 3) != 0;

    initial begin
      int total_bits;
      model = new(W, H);
      img = new[W * H];
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
        int v, rs, cs;
        rs = r * 480 / H; cs = c * 640 / W;        // scene in 640x480 units
        if (rs < 80)                        v = 250 + (cs % 6);
        else if (cs < 200)                  v = 60;
        else if (rs > 300 && cs > 400)      v = 128 + 40 * ((r / 4 + c / 4) % 2) + int'($urandom % 5);
        else                                v = (rs + 2 * cs) / 4 + int'($urandom % 3);
        img[r * W + c] = v > 255 ? 255 : v;
      end
      model.encode(img);
      total_bits = 0;
      for (int s = 0; s < 9; s++) total_bits += model.bits[s].size();
      $display("%0dx%0d: model %0d bits, %0.3f bit/pixel", W, H, total_bits, real'(total_bits) / (W * H));

      @(posedge rst_n);
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

      check(done_cycle - first_cycle == W * H + 8,
            $sformatf("%0dx%0d: H*W+8 cycles (%0d)", W, H, done_cycle - first_cycle));
      check(fifo_overflow == '0, $sformatf("%0dx%0d: no FIFO overflow", W, H));
      for (int s = 0; s < 9; s++) begin
        check(got[s].size() == model.words[s].size(),
              $sformatf("%0dx%0d sub %0d word count %0d vs %0d", W, H, s, got[s].size(), model.words[s].size()));
        for (int k = 0; k < got[s].size() && k < model.words[s].size(); k++) begin
          check(got[s][k] == model.words[s][k], $sformatf("%0dx%0d sub %0d word %0d", W, H, s, k));
          check(got_last[s][k] == (k == model.words[s].size() - 1), "last flag");
        end
      end
      finished[g] = 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished[0] && finished[1] && finished[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
