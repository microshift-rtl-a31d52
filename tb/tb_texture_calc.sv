// Self-checking test of texture_calc: random and corner templates against an
// integer model of the clamped texture vector and the merged context index.
module tb_texture_calc;
  import microshift_pkg::*;
  qpix_t a, b, c, d, e;
  ctx_t  ctx;
  logic  neg, flat;
  int checks = 0, failures = 0;

  texture_calc dut (.*);

  function automatic int cl(int v);
    return v > 2 ? 2 : (v < -2 ? -2 : v);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      int s, ia, ib, ic, id, ie;
      if (i < 8) begin ia = i; ib = i; ic = i; id = i; ie = i; end
      else begin ia = $urandom % 8; ib = $urandom % 8; ic = $urandom % 8; id = $urandom % 8; ie = $urandom % 8; end
      a = 3'(ia); b = 3'(ib); c = 3'(ic); d = 3'(id); e = 3'(ie);
      #1;
      s = 125 * cl(ia - ic) + 25 * cl(ic - ib) + 5 * cl(id - ia) + cl(ib - ie);
      checks++;
      if (int'(ctx) != (s < 0 ? -s : s) || neg != (s < 0) || flat != (s == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL a..e=%0d %0d %0d %0d %0d ctx=%0d neg=%0d flat=%0d s=%0d", ia, ib, ic, id, ie, ctx, neg, flat, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
