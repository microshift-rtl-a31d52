// Self-checking test of tx_sequencer with nine queue-modelled FIFOs:
// frame 1 fills the FIFOs over time (FIFO 1 is drained while it fills),
// then raises coded; every word must come out in subimage order with the
// right tag and last flag under random out_ready. Frame 2 is aborted and
// must end with all FIFOs cleared and aborted/done pulsing.
module tb_tx_sequencer;
  import microshift_pkg::*;
  localparam int CW = 13;
  logic clk = 0, rst_n = 0, start = 0, coded = 0, tx_abort = 0, out_ready = 0;
  logic [N_SUB-1:0] fifo_empty, fifo_pop;
  logic [CW-1:0]    fifo_count [N_SUB];
  logic [31:0]      fifo_dout [N_SUB];
  logic fifo_clear, out_valid, out_last, done, aborted;
  logic [31:0] out_data;
  sub_t out_sub;
  logic [31:0] q [N_SUB][$];
  int checks = 0, failures = 0;
  int exp_sub = 0, exp_idx = 0, n_words [N_SUB], n_done = 0, n_abort = 0, n_clear = 0;

  tx_sequencer #(.CW(CW)) dut (.*);
  always #5 clk = ~clk;

  always_comb for (int s = 0; s < N_SUB; s++) begin
    fifo_empty[s] = q[s].size() == 0;
    fifo_count[s] = CW'(q[s].size());
    fifo_dout[s]  = (q[s].size() > 0) ? q[s][0] : 32'hdead_beef;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(int'(out_sub) >= exp_sub, "subimage order");
      if (int'(out_sub) != exp_sub) begin exp_sub = int'(out_sub); exp_idx = 0; end
      check(out_data == 32'(exp_sub * 1000 + exp_idx), "word value");
      check(out_last == (coded && exp_idx == n_words[exp_sub] - 1), "last flag");
      exp_idx++;
    end
    for (int s = 0; s < N_SUB; s++) if (fifo_pop[s]) void'(q[s].pop_front());
    if (fifo_clear) begin n_clear++; for (int s = 0; s < N_SUB; s++) q[s].delete(); end
    if (done) n_done++;
    if (aborted) n_abort++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // frame 1
    for (int s = 0; s < N_SUB; s++) n_words[s] = 1 + $urandom % 6;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    fork
      begin
        for (int s = 0; s < N_SUB; s++)
          for (int k = 0; k < n_words[s]; k++) begin
            @(negedge clk);
            q[s].push_back(32'(s * 1000 + k));
          end
        @(negedge clk); coded = 1;
      end
      begin
        repeat (200) begin @(negedge clk); out_ready = ($urandom % 3) != 0; end
      end
    join
    check(n_done == 1 && n_abort == 0, "frame 1 done once, not aborted");
    check(exp_sub == N_SUB - 1 && exp_idx == n_words[N_SUB - 1], "all words sent");
    for (int s = 0; s < N_SUB; s++) check(q[s].size() == 0, "fifo drained");
    // frame 2, aborted
    coded = 0; exp_sub = 0; exp_idx = 0; out_ready = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int s = 0; s < N_SUB; s++) begin n_words[s] = 4; for (int k = 0; k < 4; k++) q[s].push_back(32'(s * 1000 + k)); end
    @(negedge clk); tx_abort = 1;
    @(negedge clk); tx_abort = 0; coded = 1;
    repeat (5) @(negedge clk);
    check(n_done == 2 && n_abort == 1 && n_clear == 1, "abort ends the frame");
    for (int s = 0; s < N_SUB; s++) check(q[s].size() == 0, "fifo cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
