// Self-checking test of error_map: all 64 (X, X^) pairs against tables
// worked out by hand from the mapping rules, and a bijectivity check per X^.
module tb_error_map;
  import microshift_pkg::*;
  qpix_t x, xhat, emap;
  int checks = 0, failures = 0;

  error_map dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // expected code for residual e = -7..7 (index e+7), X^ = 2 and X^ = 5
    int exp2 [15] = '{-1, -1, -1, -1, -1, 4, 2, 0, 1, 3, 5, 6, 7, -1, -1};
    int exp5 [15] = '{-1, -1, 7, 6, 5, 3, 1, 0, 2, 4, -1, -1, -1, -1, -1};
    for (int h = 0; h < 8; h++) begin
      bit seen [8];
      for (int k = 0; k < 8; k++) seen[k] = 0;
      for (int v = 0; v < 8; v++) begin
        x = 3'(v); xhat = 3'(h);
        #1;
        if (h == 2) begin checks++; if (int'(emap) != exp2[v - h + 7]) failures++; end
        if (h == 5) begin checks++; if (int'(emap) != exp5[v - h + 7]) failures++; end
        if (v == h) begin checks++; if (emap != 0) failures++; end
        checks++;
        if (seen[emap]) begin failures++; $display("FAIL not bijective xhat=%0d", h); end
        seen[emap] = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
