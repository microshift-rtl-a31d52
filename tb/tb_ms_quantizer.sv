// Self-checking test of ms_quantizer: every pixel value at every pattern
// position against an integer model of Q(mod(I + delta, 256)).
module tb_ms_quantizer;
  import microshift_pkg::*;
  logic [7:0] pix;
  sub_t       t;
  qpix_t      q;
  int checks = 0, failures = 0;
  int shifts [9] = '{0, 4, 7, 11, 14, 18, 21, 25, 28};

  ms_quantizer dut (.pix(pix), .pat_idx(t), .q(q));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ti = 0; ti < 9; ti++)
      for (int p = 0; p < 256; p++) begin
        int expv;
        pix = 8'(p);
        t   = 4'(ti);
        #1;
        expv = ((p + shifts[ti]) % 256) / 32;
        checks++;
        if (int'(q) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL pix=%0d t=%0d q=%0d exp=%0d", p, ti, q, expv);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
