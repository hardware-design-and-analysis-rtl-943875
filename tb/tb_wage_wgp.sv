// tb_wage_wgp: exhaustive check of the WGP look-up. All 128 outputs are
// compared with the reference (square-and-multiply evaluation), the map is
// checked to be a permutation, and the first sixteen entries are compared
// with the known values 00 12 0a 4b 66 0c 48 73 79 3e 61 51 01 15 17 0e.
module tb_wage_wgp;
  import wage_ref_pkg::*;
  logic [6:0] x, y;
  int checks = 0, failures = 0;
  logic [127:0] seen;
  localparam logic [6:0] KAT [16] = '{7'h00, 7'h12, 7'h0a, 7'h4b, 7'h66, 7'h0c, 7'h48, 7'h73,
                                      7'h79, 7'h3e, 7'h61, 7'h51, 7'h01, 7'h15, 7'h17, 7'h0e};

  wage_wgp dut (.x, .y);

  initial begin
    seen = '0;
    for (int i = 0; i < 128; i++) begin
      x = 7'(i); #1;
      checks++;
      if (y !== wgp(7'(i))) begin
        failures++;
        if (failures < 5) $display("FAIL WGP(%h) = %h, expected %h", i, y, wgp(7'(i)));
      end
      if (i < 16) begin
        checks++;
        if (y !== KAT[i]) failures++;
      end
      seen[y] = 1'b1;
    end
    checks++;
    if (!(&seen)) begin failures++; $display("FAIL WGP is not a permutation"); end
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
