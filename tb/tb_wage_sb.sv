// tb_wage_sb: exhaustive check of the 7-bit S-box: every output against
// the reference model, and the map must be a permutation.
module tb_wage_sb;
  import wage_ref_pkg::*;
  logic [6:0] x, y;
  int checks = 0, failures = 0;
  logic [127:0] seen;

  wage_sb dut (.x, .y);

  initial begin
    seen = '0;
    for (int i = 0; i < 128; i++) begin
      x = 7'(i); #1;
      checks++;
      if (y !== sb(7'(i))) begin
        failures++;
        if (failures < 5) $display("FAIL SB(%h) = %h, expected %h", i, y, sb(7'(i)));
      end
      seen[y] = 1'b1;
    end
    checks++;
    if (!(&seen)) begin failures++; $display("FAIL SB is not a permutation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
