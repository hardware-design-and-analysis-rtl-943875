// tb_ace_lfsr_c: runs the constant generator for one full permutation at
// P = 1 and at P = 4 (unrolled) and compares every round-constant bit and,
// on the last cycle of each step, the three step constants with the
// sequence q(n+7) = q(n) ^ q(n+1) from the reference model. Also checks the
// known first constants of the ACE specification: round constants of step
// 0 = 0x07, 0x53, 0x43 and step constants 0x50, 0x28, 0x14.
module tb_ace_lfsr_c;
  import ace_ref_pkg::*;
  logic clk = 0, rst, en;
  logic [0:0][2:0] rc1;
  logic [3:0][2:0] rc4;
  logic [2:0][7:0] sc1, sc4;
  int checks = 0, failures = 0;
  logic [7:0] rcb [3];

  ace_lfsr_c #(.P(1)) dut1 (.clk, .lfsr_c_reset(rst), .lfsr_c_en(en), .rc(rc1), .sc(sc1));
  ace_lfsr_c #(.P(4)) dut4 (.clk, .lfsr_c_reset(rst), .lfsr_c_en(en), .rc(rc4), .sc(sc4));

  always #5 clk = ~clk;

  task automatic chk(input logic [7:0] got, input logic [7:0] exp, input string what);
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
    for (int cyc = 0; cyc < 128; cyc++) begin
      int r;
      r = cyc;   // round index for P = 1
      for (int j = 0; j < 3; j++) begin
        chk(8'(rc1[0][j]), 8'(qbit(3*r + j)), "rc P1");
        rcb[j][r % 8] = rc1[0][j];
      end
      if (cyc % 8 == 7)
        for (int j = 0; j < 3; j++) chk(sc1[j], {qbit(3*r+j+7), qbit(3*r+j+6), qbit(3*r+j+5),
                                             qbit(3*r+j+4), qbit(3*r+j+3), qbit(3*r+j+2),
                                             qbit(3*r+j+1), qbit(3*r+j)}, "sc P1");
      if (cyc == 7) begin
        chk(rcb[0], 8'h07, "rc0 step0"); chk(rcb[1], 8'h53, "rc1 step0");
        chk(rcb[2], 8'h43, "rc2 step0");
        chk(sc1[0], 8'h50, "sc0 step0"); chk(sc1[1], 8'h28, "sc1 step0");
        chk(sc1[2], 8'h14, "sc2 step0");
      end
      if (cyc < 32) begin
        for (int k = 0; k < 4; k++)
          for (int j = 0; j < 3; j++) chk(8'(rc4[k][j]), 8'(qbit(12*cyc + 3*k + j)), "rc P4");
        if (cyc % 2 == 1)
          for (int j = 0; j < 3; j++)
            for (int b = 0; b < 8; b++) chk(8'(sc4[j][b]), 8'(qbit(12*cyc + 9 + j + b)), "sc P4");
      end
      @(posedge clk); #1;
    end
    // reset reloads the seed
    rst = 1; @(posedge clk); #1; rst = 0;
    for (int j = 0; j < 3; j++) chk(8'(rc1[0][j]), 8'(qbit(j)), "rc after reset");
    // enable low holds the state
    en = 0; @(posedge clk); @(posedge clk); #1;
    for (int j = 0; j < 3; j++) chk(8'(rc1[0][j]), 8'(qbit(j)), "rc hold");
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
