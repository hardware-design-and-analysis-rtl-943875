// tb_wage_lfsr: unit test of the WAGE state register and datapath with the
// control word driven directly (no controller), at P = 1 and P = 3.
// Sequence per instance: nine OP_LOAD words (state compared with the
// reference load), the initial permutation (ceil(112/P) OP_RUN cycles with
// round_en/constants from the reference schedule), an absorbing block, an
// encryption block (o_data checked), a padded decryption block, an
// OP_HOLD cycle, and nine OP_TAG words (o_data checked). The full 259-bit
// state is compared after every step.
module tb_wage_lfsr;
  import wage_pkg::*;
  import wage_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  wage_ctrl_t  ctrl;
  logic [63:0] i_data, od1, od3;
  logic [1:0]  i_dom_sep;
  logic [0:0]  re1;
  logic [2:0]  re3;
  logic [0:0][6:0] a0, a1;
  logic [2:0][6:0] b0, b1;
  wage_state_t st1, st3;

  wage_lfsr #(.P(1)) dut1 (.clk, .ctrl, .round_en(re1), .rc0(a0), .rc1(a1), .i_data,
                           .i_dom_sep, .o_data(od1), .state(st1));
  wage_lfsr #(.P(3)) dut3 (.clk, .ctrl, .round_en(re3), .rc0(b0), .rc1(b1), .i_data,
                           .i_dom_sep, .o_data(od3), .state(st3));

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic same(input wage_state_t h, input st_t r);
    for (int i = 0; i < 37; i++) if (h[i] !== r[i]) return 1'b0;
    return 1'b1;
  endfunction

  // Drive the constants/round enables for cycle cyc of a permutation.
  task automatic sched(input int cyc);
    re1[0] = (cyc >= 1 && cyc <= 111);
    a0[0] = rc_win(2*(cyc-1)); a1[0] = rc_win(2*(cyc-1) + 1);
    for (int k = 0; k < 3; k++) begin
      int g = 3*cyc + k;
      re3[k] = (g >= 1 && g <= 111);
      b0[k] = rc_win(2*(g-1)); b1[k] = rc_win(2*(g-1) + 1);
    end
  endtask

  // One permutation; slot 0 uses the given input operation.
  task automatic run(input wage_in_e op, input logic pad, dom, out, input logic [63:0] d,
                     input logic [1:0] ds, output logic [63:0] o1, o3);
    for (int cyc = 0; cyc < 112; cyc++) begin
      sched(cyc);
      ctrl = '{op: OP_RUN, in_op: (cyc == 0) ? op : IN_NONE, pad: pad && cyc == 0,
               dom_en: dom && cyc == 0, out_en: out && cyc == 0};
      i_data = (cyc == 0) ? d : {$urandom, $urandom};
      i_dom_sep = ds;
      // P = 3 finishes after 38 cycles; hold it afterwards.
      if (cyc >= 38) re3 = '0;
      #1;
      if (cyc == 0) begin o1 = od1; o3 = od3; end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    w64_t ld [9];
    st_t s, s0;
    logic [63:0] o1, o3, m, c;
    ctrl = '{op: OP_HOLD, in_op: IN_NONE, pad: 0, dom_en: 0, out_en: 0};
    re1 = '0; re3 = '0; a0 = '0; a1 = '0; b0 = '0; b1 = '0; i_dom_sep = '0; i_data = '0;
    foreach (ld[i]) ld[i] = {$urandom, $urandom};
    @(posedge clk); #1;

    for (int c2 = 0; c2 < 9; c2++) begin
      ctrl.op = OP_LOAD; i_data = ld[c2];
      @(posedge clk); #1;
    end
    s = wage_ref_pkg::load(ld);
    chk(same(st1, s) && same(st3, s), "state after load");

    run(IN_NONE, 0, 0, 0, '0, 2'b00, o1, o3);
    s = perm(s);
    chk(same(st1, s), "initial permutation P=1");
    chk(same(st3, s), "initial permutation P=3");

    m = {$urandom, $urandom};
    run(IN_ABSORB, 0, 1, 0, m, 2'b01, o1, o3);
    chk(o1 == 0 && o3 == 0, "no output when out_en is low");
    s = absorb(s, m, 2'b01);
    chk(same(st1, s) && same(st3, s), "absorb block");

    m = {$urandom, $urandom};
    run(IN_ABSORB, 0, 1, 1, m, 2'b10, o1, o3);
    chk(o1 == (rate(s) ^ m) && o3 == o1, "encryption output");
    s = absorb(s, m, 2'b10);
    chk(same(st1, s) && same(st3, s), "encryption block");

    c = {$urandom, $urandom};
    c[20:0] = 21'h100000;  // last 1 at bit 20
    run(IN_REPLACE, 1, 1, 1, c, 2'b10, o1, o3);
    chk(o1 == (rate(s) ^ c) && o3 == o1, "decryption output");
    s = dec_block(s, c, 1'b1);
    chk(same(st1, s) && same(st3, s), "padded decryption block");

    ctrl = '{op: OP_HOLD, in_op: IN_ABSORB, pad: 0, dom_en: 1, out_en: 1};
    i_data = '1; i_dom_sep = 2'b11; re1 = '1; re3 = '1;
    @(posedge clk); #1;
    chk(same(st1, s) && same(st3, s), "hold keeps the state");

    s0 = s;
    for (int k = 0; k < 9; k++) begin
      ctrl = '{op: OP_TAG, in_op: IN_NONE, pad: 0, dom_en: 0, out_en: 0};
      #1;
      chk(od1 == tag_word(s0, k) && od3 == od1, $sformatf("tag word %0d", k));
      @(posedge clk); #1;
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
