// tb_wage_lfsr_c: runs the WAGE constant generator through one full
// 112-slot permutation at P = 1 and P = 3 and checks, for every slot that
// is a round, rc0 and rc1 against the reference sequence windows of that
// round (slot g of the permutation is round g - 1). Also checks reseeding
// and hold.
module tb_wage_lfsr_c;
  import wage_ref_pkg::*;
  logic clk = 0, rst, en;
  always #5 clk = ~clk;
  logic [0:0][6:0] a0, a1;
  logic [2:0][6:0] b0, b1;
  int checks = 0, failures = 0;

  wage_lfsr_c #(.P(1)) dut1 (.clk, .lfsr_c_reset(rst), .lfsr_c_en(en), .rc0(a0), .rc1(a1));
  wage_lfsr_c #(.P(3)) dut3 (.clk, .lfsr_c_reset(rst), .lfsr_c_en(en), .rc0(b0), .rc1(b1));

  task automatic chk(input logic [6:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    rst = 1; en = 0;
    @(posedge clk); #1;
    rst = 0; en = 1;
    for (int cyc = 0; cyc < 112; cyc++) begin
      if (cyc >= 1) begin
        chk(a0[0], rc_win(2*(cyc-1)),     "rc0 P1");
        chk(a1[0], rc_win(2*(cyc-1) + 1), "rc1 P1");
      end
      if (cyc < 38)
        for (int k = 0; k < 3; k++) begin
          int g = 3*cyc + k;
          if (g >= 1 && g <= 111) begin
            chk(b0[k], rc_win(2*(g-1)),     "rc0 P3");
            chk(b1[k], rc_win(2*(g-1) + 1), "rc1 P3");
          end
        end
      @(posedge clk); #1;
    end
    rst = 1; @(posedge clk); #1; rst = 0; en = 0;
    @(posedge clk); @(posedge clk); #1;
    chk(b0[1], rc_win(0), "reseed + hold");
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
