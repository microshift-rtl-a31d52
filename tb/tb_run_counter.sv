// Self-checking test of run_counter: a directed run on subimage 0 (segments
// of 1,1,1,1,2,... pixels, then an interruption) and a long random stream on
// all nine subimages against a reference model of JPEG-LS run mode written
// with the J table spelled out.
module tb_run_counter;
  import microshift_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, flat = 0, hit = 0, eol = 0;
  sub_t t = '0;
  logic run_mode, ev_one, ev_int;
  logic [3:0] j;
  logic [RUN_BITS-1:0] cnt;
  int checks = 0, failures = 0;
  int jtab [32] = '{0,0,0,0,1,1,1,1,2,2,2,2,3,3,3,3,4,4,5,5,6,6,7,7,8,9,10,11,12,13,14,15};
  int m_act [9], m_cnt [9], m_idx [9];
  int n_seg = 0, n_int = 0, n_eol = 0;

  run_counter dut (.*);
  always #5 clk = ~clk;

  task automatic step(input int ti, input bit f, input bit h, input bit e);
    int e_mode, e_one, e_int, e_j, e_cnt;
    @(negedge clk);
    valid = 1; t = 4'(ti); flat = f; hit = h; eol = e;
    #1;
    // model
    e_mode = m_act[ti] || f; e_one = 0; e_int = 0; e_j = jtab[m_idx[ti]]; e_cnt = m_cnt[ti];
    if (e_mode) begin
      if (h) begin
        m_cnt[ti]++;
        if (m_cnt[ti] == (1 << e_j)) begin
          e_one = 1; n_seg++; m_cnt[ti] = 0; if (m_idx[ti] < 31) m_idx[ti]++;
        end else if (e) begin
          e_one = 1; n_eol++; m_cnt[ti] = 0;
        end
        m_act[ti] = !e;
        if (e) m_cnt[ti] = 0;
      end else begin
        e_int = 1; n_int++; m_act[ti] = 0; m_cnt[ti] = 0; if (m_idx[ti] > 0) m_idx[ti]--;
      end
    end
    checks++;
    if (run_mode != e_mode || ev_one != e_one || ev_int != e_int ||
        (e_int && (int'(j) != e_j || int'(cnt) != e_cnt))) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0d f=%0d h=%0d e=%0d: mode %0d/%0d one %0d/%0d int %0d/%0d j %0d/%0d cnt %0d/%0d",
        ti, f, h, e, run_mode, e_mode, ev_one, e_one, ev_int, e_int, j, e_j, cnt, e_cnt);
    end
    @(posedge clk);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 9; s++) begin m_act[s] = 0; m_cnt[s] = 0; m_idx[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: flat start, 6 hits -> '1' on hits 1..4 and 6, then a miss
    step(0, 1, 1, 0);
    checks++; if (!ev_one) failures++;
    for (int k = 0; k < 3; k++) step(0, 0, 1, 0);
    step(0, 0, 1, 0);
    checks++; if (ev_one) failures++;     // J = 1 now: first of two
    step(0, 0, 1, 0);
    checks++; if (!ev_one) failures++;
    step(0, 0, 0, 0);
    checks++; if (!ev_int || j != 4'd1 || cnt != 0) failures++;
    // random
    for (int i = 0; i < 20000; i++)
      step($urandom % 9, ($urandom % 4) == 0, ($urandom % 8) != 0, ($urandom % 20) == 0);
    checks++;
    if (n_seg == 0 || n_int == 0 || n_eol == 0) failures++;
    $display("segments %0d interruptions %0d row ends %0d", n_seg, n_int, n_eol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
