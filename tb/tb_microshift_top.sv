// End-to-end test of microshift_top at a reduced size (W = 26, H = 13, FIFO
// depth 4 words). Every frame is also encoded by the software model in
// ms_ref_pkg and each word of every subimage stream is compared, with its
// subimage tag and last flag, in transmission order.
//   frame 1  smooth image with a saturated bright area, pixels back to back:
//            frame_done must come H*W + 8 cycles after the first pixel
//   frame 2  large flat areas (runs, run segments, row ends, interruptions),
//            random input gaps and random output back-pressure
//   frame 3  aborted by the receiver during compression: the frame must end
//            with tx_aborted and the core must take the next frame
//   frame 4  noise with the output held off until the frame is compressed:
//            a FIFO must overflow exactly where the model's stream is longer
//            than the FIFO
//   frame 5  a normal frame after the overflow
// Each mechanism is counted and a mechanism that never occurred is a failure.
module tb_microshift_top;
  import microshift_pkg::*;
  import ms_ref_pkg::*;

  localparam int W = 26, H = 13, DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [7:0] in_pixel = '0;
  logic out_valid, out_ready = 0, out_last, tx_abort = 0;
  logic [31:0] out_data;
  logic [3:0] out_sub;
  logic frame_done, tx_done, tx_aborted;
  logic [8:0] fifo_overflow;

  microshift_top #(.W(W), .H(H), .FIFO_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  ms_ref model;
  int img [];
  logic [31:0] got [9][$];
  logic        got_last [9][$];
  int cycle = 0, first_cycle = -1, done_cycle = -1;
  int gaps_on = 0, ready_mode = 0;   // ready_mode 0: random, 1: held low, 2: always
  // mechanism counters
  int m_intra, m_inter, m_run, m_seg, m_int, m_eol, m_wrap, m_nointer, m_edge;
  int m_stall = 0, m_backpressure = 0, m_early_drain = 0, m_abort = 0, m_overflow = 0, m_latency = 0;
  bit frame_coded = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (in_valid && in_ready && first_cycle < 0) first_cycle = cycle;
      if (in_valid && !in_ready) m_stall++;
      if (frame_done) begin done_cycle = cycle; frame_coded = 1; end
      if (out_valid && !out_ready) m_backpressure++;
      if (out_valid && out_ready) begin
        if (!frame_coded) m_early_drain++;
        got[out_sub].push_back(out_data);
        got_last[out_sub].push_back(out_last);
      end
    end
  end

  always @(negedge clk)
    case (ready_mode)
      0: out_ready = ($urandom % 4) != 0;
      1: out_ready = 0;
      default: out_ready = 1;
    endcase

  task automatic send_frame(input int abort_at);
    first_cycle = -1; done_cycle = -1; frame_coded = 0;
    for (int s = 0; s < 9; s++) begin got[s].delete(); got_last[s].delete(); end
    for (int n = 0; n < W * H; n++) begin
      @(negedge clk);
      if (n == abort_at) tx_abort = 1; else tx_abort = 0;
      if (gaps_on) while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); tx_abort = 0; end
      in_valid = 1;
      in_pixel = 8'(img[n]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    // keep offering pixels: the core must refuse them while it flushes
    if (gaps_on) begin
      @(negedge clk); tx_abort = 0;
      repeat (5) @(negedge clk);
    end
    @(negedge clk); in_valid = 0; tx_abort = 0;
  endtask

  task automatic wait_tx();
    int guard;
    guard = 0;
    while (!tx_done && guard < 100000) begin @(posedge clk); guard++; end
    check(guard < 100000, "frame transmission ends");
    @(posedge clk);
  endtask

  task automatic compare(input string name);
    for (int s = 0; s < 9; s++) begin
      check(got[s].size() == model.words[s].size(),
            $sformatf("%s sub %0d word count %0d vs %0d", name, s, got[s].size(), model.words[s].size()));
      for (int k = 0; k < got[s].size() && k < model.words[s].size(); k++) begin
        check(got[s][k] == model.words[s][k], $sformatf("%s sub %0d word %0d %h vs %h", name, s, k, got[s][k], model.words[s][k]));
        check(got_last[s][k] == (k == model.words[s].size() - 1), $sformatf("%s sub %0d last flag", name, s));
      end
    end
  endtask

  task automatic run_model();
    model.encode(img);
    m_intra += model.n_intra; m_inter += model.n_inter; m_run += model.n_run_pix;
    m_seg += model.n_seg; m_int += model.n_int; m_eol += model.n_eol;
    m_wrap += model.n_wrap; m_nointer += model.n_nointersect; m_edge += model.n_edge_tile;
  endtask

  initial begin
    model = new(W, H);
    img = new[W * H];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // frame 1: smooth with a saturated corner, back-to-back pixels
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int v;
      v = 40 + 6 * r + 5 * c + ($urandom % 9);
      img[r * W + c] = (r < 5 && c > 15) ? 255 - ($urandom % 3) : (v > 255 ? 255 : v);
    end
    run_model();
    gaps_on = 0; ready_mode = 0;
    send_frame(-1);
    wait_tx();
    check(done_cycle - first_cycle == W * H + 8,
          $sformatf("compression takes H*W+8 cycles (%0d)", done_cycle - first_cycle));
    if (done_cycle - first_cycle == W * H + 8) m_latency++;
    compare("frame1");

    // frame 2: flat areas, gaps, back-pressure
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      img[r * W + c] = (c < 12) ? 100 : ((r < 6) ? 180 + (($urandom % 8) == 0 ? 60 : 0) : 20 + 9 * c);
    run_model();
    gaps_on = 1;
    send_frame(-1);
    wait_tx();
    compare("frame2");

    // frame 3: aborted
    for (int n = 0; n < W * H; n++) img[n] = (n * 3) % 256;
    run_model();
    gaps_on = 0; ready_mode = 1;
    fork
      send_frame(W * H / 2);
      begin
        int guard;
        guard = 0;
        while (!tx_aborted && guard < 100000) begin @(posedge clk); guard++; end
        if (tx_aborted) m_abort++;
      end
    join
    check(m_abort == 1, "abort ends the frame");
    ready_mode = 0;
    repeat (3) @(posedge clk);
    check(in_ready, "ready for a new frame after abort");

    // frame 4: noise, output held off -> overflow
    for (int n = 0; n < W * H; n++) img[n] = $urandom % 256;
    run_model();
    ready_mode = 1;
    send_frame(-1);
    while (!frame_coded) @(posedge clk);
    repeat (4) @(posedge clk);
    for (int s = 0; s < 9; s++) begin
      check(fifo_overflow[s] == (model.words[s].size() > DEPTH), $sformatf("overflow flag sub %0d", s));
      if (fifo_overflow[s]) m_overflow++;
    end
    ready_mode = 2;
    wait_tx();
    for (int s = 0; s < 9; s++)
      for (int k = 0; k < got[s].size() && k < DEPTH; k++)
        check(got[s][k] == model.words[s][k], "words kept before the overflow");

    // frame 5: normal again
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[r * W + c] = 128 + 4 * (c % 7) - 3 * (r % 5);
    run_model();
    ready_mode = 0; gaps_on = 1;
    send_frame(-1);
    wait_tx();
    check(fifo_overflow == '0, "overflow flags cleared by the next frame");
    compare("frame5");

    $display("mechanisms: intra %0d inter %0d run-mode %0d segments %0d interruptions %0d row-ends %0d wrap %0d",
             m_intra, m_inter, m_run, m_seg, m_int, m_eol, m_wrap);
    $display("            empty-intersection %0d edge-tile %0d input-stall %0d back-pressure %0d early-drain %0d abort %0d overflow %0d latency-ok %0d",
             m_nointer, m_edge, m_stall, m_backpressure, m_early_drain, m_abort, m_overflow, m_latency);
    check(m_intra > 0 && m_inter > 0, "intra and inter prediction used");
    check(m_run > 0 && m_seg > 0 && m_int > 0 && m_eol > 0, "run mode: segments, interruptions, row ends");
    check(m_wrap > 0, "modulo wrap of bright pixels");
    check(m_nointer > 0, "non-overlapping uncertainty ranges");
    check(m_edge > 0, "partial tile at the right edge");
    check(m_stall > 0 && m_backpressure > 0 && m_early_drain > 0, "stall, back-pressure, drain during compression");
    check(m_overflow > 0 && m_latency > 0, "overflow, latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
