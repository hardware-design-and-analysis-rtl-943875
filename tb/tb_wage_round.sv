// tb_wage_round: compares one combinational WAGE round (two WGP, four SB,
// the feedback with the w multiplier and both constants) with the
// reference round for random states and random constant windows.
module tb_wage_round;
  import wage_pkg::*;
  import wage_ref_pkg::*;
  wage_state_t s, n;
  logic [6:0] rc0, rc1;
  int checks = 0, failures = 0;

  wage_round dut (.s, .rc0, .rc1, .n);

  initial begin
    st_t r, e;
    for (int it = 0; it < 500; it++) begin
      int t = $urandom_range(0, 110);
      for (int i = 0; i < 37; i++) begin r[i] = 7'($urandom); s[i] = r[i]; end
      rc0 = rc_win(2*t); rc1 = rc_win(2*t + 1);
      #1;
      e = round(r, t);
      checks++;
      for (int i = 0; i < 37; i++)
        if (n[i] !== e[i]) begin
          failures++;
          if (failures < 5) $display("FAIL stage %0d got %h exp %h", i, n[i], e[i]);
          break;
        end
    end
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
