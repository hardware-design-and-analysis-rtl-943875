// tb_ace_fsm: drives the ACE controller's interface and checks its outputs
// cycle by cycle against the protocol: load word sequence (A, C, B, E) and
// the hash IV load, o_ready / pcount timing (128 cycles per permutation at
// P = 1, 16 at P = 8, pcount stalls at 0 while waiting), the decoding of
// i_mode / i_dom_sep into datapath controls, step marks every 8th round,
// lfsr_c enable/reset, and the two-word tag output after the second
// finalisation block.
module tb_ace_fsm;
  import ace_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic reset, i_padding, i_valid, o_ready, o_valid, lce, lcr;
  logic [1:0] i_mode, i_dom_sep;
  ace_ctrl_t ctrl;
  logic [7:0] pcount;

  ace_fsm #(.P(1)) dut (.clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_valid,
                        .o_ready, .o_valid, .ctrl, .lfsr_c_en(lce), .lfsr_c_reset(lcr), .pcount);

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Run a permutation whose first cycle was just accepted; count busy cycles.
  task automatic wait_perm(input int expect_cycles);
    int n = 1;
    while (!o_ready && n < 1000) begin
      chk(ctrl.perm_en && lce, "perm controls during run");
      chk(lcr == (pcount == 127), "lfsr_c reseeded exactly on the last cycle");
      chk(ctrl.step == (int'(pcount) % 8 == 7), "step mark");
      chk(!o_valid, "no o_valid while busy");
      @(posedge clk); #1;
      if (!o_ready) n++;
    end
    chk(n == expect_cycles, $sformatf("permutation length %0d", n));
    chk(pcount == 0, "pcount wrapped to 0");
  endtask

  task automatic block(input logic [1:0] mode, input logic [1:0] ds, input logic pad,
                       input ace_in_e exp_in, input ace_out_e exp_out, input logic exp_valid);
    // stall a few cycles first: pcount must stay at 0
    repeat (3) begin
      @(posedge clk); #1;
      chk(o_ready && pcount == 0 && lcr, "stall while waiting for i_valid");
    end
    i_mode = mode; i_dom_sep = ds; i_padding = pad; i_valid = 1;
    #1;
    chk(ctrl.in_op == exp_in, "in_op decode");
    chk(ctrl.out_sel == exp_out, "out_sel decode");
    chk(o_valid == exp_valid, "o_valid in accept cycle");
    chk(ctrl.perm_en && !ctrl.hold && !lcr, "accept cycle is round 0");
    chk(ctrl.dom_en == !mode[1], "dom_en");
    chk(ctrl.pad == (pad && mode == 2'b01 && ds == 2'b10), "pad only in decryption");
    @(posedge clk); #1;
    i_valid = 0;
    chk(!o_ready && pcount == 1, "busy after accept");
    wait_perm(127);   // the accept cycle was the first of 128
  endtask

  initial begin
    reset = 1; i_valid = 0; i_mode = 0; i_dom_sep = 0; i_padding = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    chk(o_ready, "ready for load");
    // AEAD load: four words
    for (int w = 0; w < 4; w++) begin
      ace_ld_e exp_ld [4] = '{LD_A, LD_C, LD_B, LD_E};
      i_valid = 1; i_mode = 2'b00; #1;
      chk(ctrl.ld == exp_ld[w] && !ctrl.hold, "load word select");
      @(posedge clk); #1;
      i_valid = 0;
      if (w < 3) begin
        @(posedge clk); #1;
        chk(ctrl.ld == LD_NONE && ctrl.hold, "no load without i_valid");
      end
    end
    wait_perm(128);
    block(2'b00, 2'b00, 0, IN_ABSORB, OUT_ZERO, 0);   // K0
    block(2'b00, 2'b00, 0, IN_ABSORB, OUT_ZERO, 0);   // K1
    block(2'b00, 2'b01, 0, IN_ABSORB, OUT_ZERO, 0);   // AD
    block(2'b01, 2'b10, 1, IN_REPLACE, OUT_XOR, 1);   // C (padded)
    block(2'b00, 2'b00, 0, IN_ABSORB, OUT_ZERO, 0);   // final K0
    // final K1: after its permutation two tag words follow
    i_mode = 0; i_dom_sep = 0; i_valid = 1;
    @(posedge clk); #1; i_valid = 0;
    do begin @(posedge clk); #1; end while (!o_valid);
    chk(ctrl.out_sel == OUT_RATE && !o_ready, "tag word 0");
    @(posedge clk); #1;
    chk(o_valid && ctrl.out_sel == OUT_LOW, "tag word 1");
    @(posedge clk); #1;
    chk(!o_valid && o_ready, "back to load after tag");
    // hash: one i_valid loads the IV
    i_mode = 2'b10; i_valid = 1; #1;
    chk(ctrl.ld == LD_IV, "hash IV load");
    @(posedge clk); #1; i_valid = 0;
    wait_perm(128);
    block(2'b10, 2'b00, 0, IN_ABSORB, OUT_ZERO, 0);   // absorb
    block(2'b11, 2'b00, 0, IN_NONE, OUT_RATE, 1);     // squeeze
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
