// tb_ace_sb64: checks one SB-64_1 round against the reference model on
// fixed and random inputs (all-zero input, both round-constant values,
// single-bit inputs and 2000 random words). Purely combinational DUT.
module tb_ace_sb64;
  import ace_ref_pkg::*;
  logic [63:0] x, y;
  logic        rc;
  int checks = 0, failures = 0;

  ace_sb64 dut (.x, .rc, .y);

  task automatic check_one(input logic [63:0] xv, input logic r);
    logic [63:0] exp;
    x = xv; rc = r;
    #1;
    exp = simeck(xv, r);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 5) $display("FAIL x=%h rc=%0d y=%h exp=%h", xv, r, y, exp);
    end
  endtask

  initial begin
    // f(0) = 0: output left half is the constant with rc in bit 0
    check_one(64'd0, 1'b0);
    check_one(64'd0, 1'b1);
    x = 0; rc = 0; #1;
    checks++; if (y !== 64'hFFFF_FFFE_0000_0000) failures++;
    for (int i = 0; i < 64; i++) check_one(64'd1 << i, i[0]);
    for (int i = 0; i < 2000; i++) check_one({$urandom, $urandom}, 1'($urandom));
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
