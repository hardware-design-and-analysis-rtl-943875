// tb_wage_fsm: protocol and timing test of the WAGE controller at P = 1
// and P = 3 (one instance each, same stimulus, compared with expected
// values per cycle). Checks: load words give OP_LOAD and keep the
// constant generator in reseed; the initial and every later permutation
// keep o_ready low for exactly ceil(112/P) cycles in total, enable exactly
// 111 rounds, and reseed on their last cycle; AD/message/decryption
// blocks decode to the right control word and o_valid; key blocks before
// any message do not start a tag; two key blocks after a message produce
// nine OP_TAG cycles with o_valid, after which the core expects a load.
module tb_wage_fsm;
  import wage_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic reset, i_padding, i_valid;
  logic [1:0] i_mode, i_dom_sep;
  logic rdy [2], vld [2], en [2], lcr [2];
  wage_ctrl_t ctl [2];
  logic [0:0] re1;
  logic [2:0] re3;
  logic [6:0] pc [2];
  localparam int NC [2] = '{112, 38};

  wage_fsm #(.P(1)) u1 (.clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_valid,
                        .o_ready(rdy[0]), .o_valid(vld[0]), .ctrl(ctl[0]), .round_en(re1),
                        .lfsr_c_en(en[0]), .lfsr_c_reset(lcr[0]), .pcount(pc[0]));
  wage_fsm #(.P(3)) u3 (.clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_valid,
                        .o_ready(rdy[1]), .o_valid(vld[1]), .ctrl(ctl[1]), .round_en(re3),
                        .lfsr_c_en(en[1]), .lfsr_c_reset(lcr[1]), .pcount(pc[1]));

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Drive one accepted word; the instances are exercised one after the
  // other (u = 0, then u = 1).
  task automatic word(input int u, input logic [1:0] mode, ds, input logic pad,
                      input wage_op_e op, input wage_in_e in_op, input logic out);
    chk(rdy[u], $sformatf("u%0d ready before word", u));
    i_mode = mode; i_dom_sep = ds; i_padding = pad; i_valid = 1; #1;
    chk(ctl[u].op == op, $sformatf("u%0d op", u));
    if (op == OP_RUN) begin
      chk(ctl[u].in_op == in_op && ctl[u].dom_en, $sformatf("u%0d input op", u));
      chk(ctl[u].out_en == out && vld[u] == out, $sformatf("u%0d output enable", u));
      chk(ctl[u].pad == pad, $sformatf("u%0d pad", u));
      chk(en[u] && !lcr[u], $sformatf("u%0d constants run in slot 0", u));
    end else chk(lcr[u] && !vld[u], $sformatf("u%0d reseed while loading", u));
    @(posedge clk); #1;
    i_valid = 0;
  endtask

  // Count busy cycles after an accepted block (or the last load word).
  task automatic busy(input int u, input int first_rounds);
    int n = 1, rounds = first_rounds, resets = 0;
    while (!rdy[u] && n < 400) begin
      chk(ctl[u].op == OP_RUN && en[u] && !vld[u], $sformatf("u%0d running", u));
      rounds += (u == 0) ? $countones(re1) : $countones(re3);
      if (lcr[u]) begin
        resets++;
        chk(int'(pc[u]) == NC[u] - 1, $sformatf("u%0d reseed only at the end", u));
      end
      @(posedge clk); #1; n++;
    end
    chk(resets == 1, $sformatf("u%0d one reseed per permutation", u));
    chk(rounds == 111, $sformatf("u%0d 111 rounds (got %0d)", u, rounds));
    // the initial permutation runs NCYC whole cycles after the last word
    chk(n == NC[u] + 1, $sformatf("u%0d initial permutation latency %0d", u, n));
  endtask

  task automatic blk(input int u, input logic [1:0] mode, ds, input logic pad,
                     input wage_in_e in_op, input logic out);
    word(u, mode, ds, pad, OP_RUN, in_op, out);
    // the accept cycle also holds rounds 1 and 2 for P = 3
    busy_block(u, (u == 0) ? 0 : 2);
  endtask

  task automatic busy_block(input int u, input int r0);
    int n = 1, rounds = r0, resets = 0;
    while (!rdy[u] && n < 400) begin
      rounds += (u == 0) ? $countones(re1) : $countones(re3);
      if (lcr[u]) resets++;
      chk(ctl[u].op == OP_RUN && !vld[u], $sformatf("u%0d running", u));
      @(posedge clk); #1; n++;
    end
    chk(n == NC[u], $sformatf("u%0d block latency %0d", u, n));
    chk(rounds == 111, $sformatf("u%0d block rounds %0d", u, rounds));
    chk(resets == 1, $sformatf("u%0d block reseeds %0d", u, resets));
  endtask

  initial begin
    reset = 1; i_valid = 0; i_mode = 0; i_dom_sep = 0; i_padding = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    for (int u = 0; u < 2; u++) begin
      chk(rdy[u] && ctl[u].op == OP_HOLD && !vld[u], "idle in load state");
      for (int k = 0; k < 9; k++) word(u, 2'b00, 2'b00, 0, OP_LOAD, IN_NONE, 0);
      chk(!rdy[u], "busy after nine load words");
      busy(u, 0);
      blk(u, 2'b00, 2'b00, 0, IN_ABSORB, 0);   // key block
      blk(u, 2'b00, 2'b00, 0, IN_ABSORB, 0);   // key block, no tag yet
      blk(u, 2'b00, 2'b01, 0, IN_ABSORB, 0);   // AD
      blk(u, 2'b00, 2'b10, 0, IN_ABSORB, 1);   // message, encryption
      blk(u, 2'b01, 2'b10, 1, IN_REPLACE, 1);  // padded decryption
      blk(u, 2'b00, 2'b00, 0, IN_ABSORB, 0);   // finalisation 1
      word(u, 2'b00, 2'b00, 0, OP_RUN, IN_ABSORB, 0);
      while (!vld[u]) begin @(posedge clk); #1; end
      for (int k = 0; k < 9; k++) begin
        chk(vld[u] && ctl[u].op == OP_TAG && !rdy[u], "tag cycle");
        @(posedge clk); #1;
      end
      chk(!vld[u] && rdy[u], "ready for a load after the tag");
      word(u, 2'b00, 2'b00, 0, OP_LOAD, IN_NONE, 0);
      reset = 1; @(posedge clk); #1; reset = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
