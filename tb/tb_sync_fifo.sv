// Self-checking test of sync_fifo (DEPTH = 8): random push/pop traffic
// against a queue model, fill to full and past it (overflow flag, dropped
// words), and clear.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  logic [31:0] din = '0, dout;
  logic empty, full, overflow;
  logic [$clog2(DEPTH):0] count;
  logic [31:0] model [$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(int'(count) == model.size(), "count");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == DEPTH), "full");
      if (model.size() > 0) check(dout == model[0], "dout");
      push = ($urandom % 2) && (model.size() < DEPTH);
      pop  = ($urandom % 2) && (model.size() > 0);
      din  = $urandom;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    @(negedge clk); push = 0; pop = 0;
    check(!overflow, "no overflow yet");
    // overfill
    for (int i = 0; i < DEPTH + 3; i++) begin
      @(negedge clk);
      push = 1; din = 32'(1000 + i);
      if (model.size() < DEPTH) model.push_back(din);
    end
    @(negedge clk); push = 0;
    check(full && overflow, "overflow flagged");
    check(dout == model[0], "oldest word kept");
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    check(empty && !overflow, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
