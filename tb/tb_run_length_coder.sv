// Self-checking test of run_length_coder: '1' for ev_one, '0' + J-bit count
// for every J and random counts below 2^J, nothing otherwise.
module tb_run_length_coder;
  import microshift_pkg::*;
  logic ev_one, ev_int;
  logic [3:0] j;
  logic [RUN_BITS-1:0] cnt, bits;
  logic [LEN_BITS-1:0] len;
  int checks = 0, failures = 0;

  run_length_coder dut (.*);

  task automatic check(input int eb, input int el);
    checks++;
    if (int'(bits) != eb || int'(len) != el) begin
      failures++;
      if (failures < 10) $display("FAIL one=%0d int=%0d j=%0d cnt=%0d: %0h/%0d exp %0h/%0d", ev_one, ev_int, j, cnt, bits, len, eb, el);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev_one = 0; ev_int = 0; j = 0; cnt = 0;
    #1 check(0, 0);
    ev_one = 1;
    #1 check(1, 1);
    ev_one = 0; ev_int = 1;
    for (int jj = 0; jj < 16; jj++)
      for (int k = 0; k < 20; k++) begin
        int c;
        c = (jj == 0) ? 0 : int'($urandom % (1 << jj));
        j = 4'(jj); cnt = 16'(c);
        #1 check(c, jj + 1);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
