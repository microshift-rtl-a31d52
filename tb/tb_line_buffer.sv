// Self-checking test of line_buffer: pushes a random stream with gaps and
// checks dout and every tap against a software history of the pushes.
module tb_line_buffer;
  import microshift_pkg::*;
  localparam int W = 17, TAPS = 6;
  logic  clk = 0, shift = 0;
  qpix_t din = '0, dout;
  qpix_t taps [TAPS];
  qpix_t hist [$];
  int checks = 0, failures = 0;

  line_buffer #(.W(W), .TAPS(TAPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      shift = ($urandom % 4) != 0;
      din   = qpix_t'($urandom);
      if (shift) hist.push_front(din);
      @(posedge clk); #1;
      if (hist.size() >= W) begin
        checks++;
        if (dout != hist[W-1]) begin failures++; if (failures < 10) $display("FAIL dout i=%0d", i); end
        for (int k = 0; k < TAPS; k++) begin
          checks++;
          if (taps[k] != hist[k]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
