// Self-checking test of dict_rom: every address against the planar default
// D(l) = q1, where q1 is worked out here by searching the balanced base-5
// digits of l, and 0 for addresses past the table.
module tb_dict_rom;
  import microshift_pkg::*;
  ctx_t addr;
  logic signed [3:0] data;
  int checks = 0, failures = 0;

  dict_rom dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expq [int];
    for (int q1 = -2; q1 <= 2; q1++) for (int q2 = -2; q2 <= 2; q2++)
      for (int q3 = -2; q3 <= 2; q3++) for (int q4 = -2; q4 <= 2; q4++) begin
        int s;
        s = 125 * q1 + 25 * q2 + 5 * q3 + q4;
        if (s >= 0) expq[s] = q1;
      end
    for (int l = 0; l < 512; l++) begin
      addr = 9'(l);
      #1;
      checks++;
      if (int'(data) != (l < 313 ? expq[l] : 0)) begin
        failures++;
        if (failures < 10) $display("FAIL l=%0d data=%0d", l, data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
