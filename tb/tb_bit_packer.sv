// Self-checking test of bit_packer: random codes (0..24 bits, junk above
// len) are fed in, the expected bit string is kept in a queue, and every
// word written (including the flushed, zero-padded last one) is compared.
module tb_bit_packer;
  import microshift_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, flush = 0, wr_en;
  logic [CODE_BITS-1:0] in_bits = '0;
  logic [LEN_BITS-1:0]  in_len = '0;
  logic [31:0] wr_data;
  bit   expq [$];
  int checks = 0, failures = 0, words = 0;

  bit_packer dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && wr_en) begin
    logic [31:0] ew;
    for (int k = 31; k >= 0; k--) ew[k] = (expq.size() > 0) ? expq.pop_front() : 1'b0;
    checks++; words++;
    if (ew != wr_data) begin
      failures++;
      if (failures < 10) $display("FAIL word %0d got %h exp %h", words, wr_data, ew);
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int l;
      @(negedge clk);
      l = $urandom % 25;
      in_valid = ($urandom % 4) != 0;
      in_len   = 5'(l);
      in_bits  = 24'($urandom);
      if (in_valid) for (int k = l - 1; k >= 0; k--) expq.push_back(in_bits[k]);
    end
    @(negedge clk); in_valid = 0; flush = 1;
    @(negedge clk); flush = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d bits never written", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
