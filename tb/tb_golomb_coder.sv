// Self-checking test of golomb_coder at K = 0 (unary, hand-written table) and
// K = 1 (checked by decoding the produced bit string back to the value).
module tb_golomb_coder;
  import microshift_pkg::*;
  qpix_t emap;
  logic [7:0] bits0, bits1;
  logic [LEN_BITS-1:0] len0, len1;
  int checks = 0, failures = 0;

  golomb_coder #(.K(0)) dut0 (.emap, .bits(bits0), .len(len0));
  golomb_coder #(.K(1)) dut1 (.emap, .bits(bits1), .len(len1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      int zeros, val, pos;
      emap = 3'(v);
      #1;
      checks++;
      if (int'(len0) != v + 1 || bits0 != 8'd1) begin failures++; $display("FAIL K0 v=%0d", v); end
      // decode the K=1 string: count zeros, skip the one, read one bit
      zeros = 0; pos = int'(len1) - 1;
      while (pos >= 0 && bits1[pos] == 1'b0) begin zeros++; pos--; end
      checks++;
      if (pos != 1) failures++;
      else begin
        val = zeros * 2 + int'(bits1[0]);
        checks++;
        if (val != v) begin failures++; $display("FAIL K1 v=%0d dec=%0d", v, val); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
