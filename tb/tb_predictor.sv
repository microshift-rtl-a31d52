// Self-checking test of predictor. Intra mode: random B, context and sign
// against B + (+-q1) saturated, with q1 taken from the balanced base-5 digits
// of the context. Inter mode: random 3x3 tiles against an integer model of
// the uncertainty-range intersection and re-quantization, plus a hand-worked
// case.
module tb_predictor;
  import microshift_pkg::*;
  sub_t t;
  qpix_t b, xhat;
  ctx_t ctx;
  logic neg;
  logic [8:0][M_BITS-1:0] blk;
  logic [8:0] blk_ok;
  int checks = 0, failures = 0;
  int sh [9] = '{0, 4, 7, 11, 14, 18, 21, 25, 28};

  predictor dut (.*);

  function automatic int q1_of(int l);
    for (int q1 = -2; q1 <= 2; q1++) for (int q2 = -2; q2 <= 2; q2++)
      for (int q3 = -2; q3 <= 2; q3++) for (int q4 = -2; q4 <= 2; q4++)
        if (125 * q1 + 25 * q2 + 5 * q3 + q4 == l) return q1;
    return 0;
  endfunction

  function automatic int fdiv2(int v);   // floor(v / 2)
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  task automatic check(input int expv, input string what);
    checks++;
    if (int'(xhat) != expv) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0d got %0d exp %0d", what, t, xhat, expv);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked inter case: t = 1, neighbour u = 0 with z = 3:
    // range [96, 128), Dec = 112, 112 + 4 = 116 -> level 3
    t = 4'd1; b = '0; ctx = '0; neg = 0; blk = '0; blk_ok = '0;
    blk[0] = 3'd3; blk_ok[0] = 1'b1;
    #1 check(3, "hand inter");
    // hand-worked intra: context 125 (q1 = 1), B = 7 -> saturates at 7
    t = 4'd0; b = 3'd7; ctx = 9'd125; neg = 0;
    #1 check(7, "hand intra sat");
    neg = 1;
    #1 check(6, "hand intra neg");

    for (int i = 0; i < 5000; i++) begin
      int d, expv, lo, hi, est, tt;
      tt = (i % 2) ? 0 : 1 + $urandom % 8;
      t = 4'(tt);
      b = qpix_t'($urandom); ctx = 9'($urandom % 313); neg = 1'($urandom);
      for (int u = 0; u < 9; u++) blk[u] = qpix_t'($urandom);
      blk_ok = '0;
      for (int u = 0; u < tt; u++) blk_ok[u] = ($urandom % 4 != 0) || u == 0;
      #1;
      if (tt == 0) begin
        d = q1_of(ctx);
        expv = int'(b) + (neg ? -d : d);
        expv = expv < 0 ? 0 : (expv > 7 ? 7 : expv);
      end else begin
        lo = -1000; hi = 1000;
        for (int u = 0; u < 9; u++) if (blk_ok[u]) begin
          int l;
          l = 32 * int'(blk[u]) - sh[u];
          if (l > lo) lo = l;
          if (l + 32 < hi) hi = l + 32;
        end
        est = fdiv2(lo + hi);
        expv = ((est + sh[tt] + 512) % 256) / 32;
      end
      check(expv, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
