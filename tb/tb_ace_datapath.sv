// tb_ace_datapath: drives the datapath's control struct directly, at P = 1
// and P = 8, with round and step constants taken from the reference
// sequence. Checks: register loads (key/nonce words, D cleared, hash IV),
// one whole permutation after loading, absorption with domain separator
// merged into the first round of the next permutation, decryption replace
// (full and padded block), every o_data multiplexer setting and the hold.
module tb_ace_datapath;
  import ace_pkg::*;
  import ace_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ace_ctrl_t        c1, c8;
  logic [63:0]      d1, d8, o1, o8;
  logic [1:0]       ds1, ds8;
  logic [0:0][2:0]  rc1;
  logic [7:0][2:0]  rc8;
  logic [2:0][7:0]  sc1, sc8;
  logic [4:0][63:0] st1, st8;

  ace_datapath #(.P(1)) dut1 (.clk, .ctrl(c1), .i_data(d1), .i_dom_sep(ds1), .rc(rc1), .sc(sc1),
                              .o_data(o1), .state(st1));
  ace_datapath #(.P(8)) dut8 (.clk, .ctrl(c8), .i_data(d8), .i_dom_sep(ds8), .rc(rc8), .sc(sc8),
                              .o_data(o8), .state(st8));

  localparam ace_ctrl_t IDLE = '{in_op: IN_NONE, pad: 1'b0, dom_en: 1'b0, out_sel: OUT_ZERO,
                                 perm_en: 1'b0, step: 1'b0, ld: LD_NONE, hold: 1'b1};

  function automatic ace_st_t unpack(input logic [4:0][63:0] v);
    ace_st_t s;
    s.a = v[0]; s.b = v[1]; s.c = v[2]; s.d = v[3]; s.e = v[4];
    return s;
  endfunction

  task automatic chk64(input logic [63:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic chk_state(input logic [4:0][63:0] got, input ace_st_t exp, input string what);
    ace_st_t g;
    g = unpack(got);
    chk64(g.a, exp.a, {what, " A"}); chk64(g.b, exp.b, {what, " B"});
    chk64(g.c, exp.c, {what, " C"}); chk64(g.d, exp.d, {what, " D"});
    chk64(g.e, exp.e, {what, " E"});
  endtask

  // Cycle cyc of a permutation at P = 1 / P = 8; first = ctrl of cycle 0.
  task automatic run_perm1(input ace_ctrl_t first);
    for (int cyc = 0; cyc < 128; cyc++) begin
      c1 = (cyc == 0) ? first : IDLE;
      c1.perm_en = 1; c1.hold = 0; c1.step = (cyc % 8 == 7);
      for (int j = 0; j < 3; j++) rc1[0][j] = qbit(3*cyc + j);
      for (int j = 0; j < 3; j++) for (int b = 0; b < 8; b++) sc1[j][b] = qbit(3*cyc + j + b);
      @(posedge clk); #1;
    end
    c1 = IDLE;
  endtask

  task automatic run_perm8(input ace_ctrl_t first);
    for (int cyc = 0; cyc < 16; cyc++) begin
      c8 = (cyc == 0) ? first : IDLE;
      c8.perm_en = 1; c8.hold = 0; c8.step = 1;
      for (int k = 0; k < 8; k++) for (int j = 0; j < 3; j++) rc8[k][j] = qbit(24*cyc + 3*k + j);
      for (int j = 0; j < 3; j++) for (int b = 0; b < 8; b++) sc8[j][b] = qbit(24*cyc + 21 + j + b);
      @(posedge clk); #1;
    end
    c8 = IDLE;
  endtask

  initial begin
    ace_st_t ref1, ref8, raw;
    logic [63:0] k0, k1, n0, n1, x, m;
    ace_ctrl_t cc;
    c1 = IDLE; c8 = IDLE; ds1 = 0; ds8 = 0; d1 = 0; d8 = 0;
    rc1 = '0; rc8 = '0; sc1 = '0; sc8 = '0;
    k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom};
    n0 = {$urandom, $urandom}; n1 = {$urandom, $urandom};
    @(posedge clk); #1;
    // load: A, C, B, E (D cleared with A)
    begin
      ace_ld_e lds [4] = '{LD_A, LD_C, LD_B, LD_E};
      logic [63:0] ws [4];
      ws = '{k0, k1, n0, n1};
      for (int w = 0; w < 4; w++) begin
        c1 = IDLE; c1.ld = lds[w]; c1.hold = 0; d1 = ws[w];
        c8 = IDLE; c8.ld = lds[w]; c8.hold = 0; d8 = ws[w];
        @(posedge clk); #1;
      end
    end
    c1 = IDLE; c8 = IDLE;
    raw.a = k0; raw.c = k1; raw.b = n0; raw.e = n1; raw.d = 0;
    chk_state(st1, raw, "load P1");
    chk_state(st8, raw, "load P8");
    // initial permutation
    run_perm1(IDLE);
    run_perm8(IDLE);
    ref1 = load_ae(k0, k1, n0, n1);
    chk_state(st1, ref1, "perm P1");
    chk_state(st8, ref1, "perm P8");

    // hold: state unchanged over idle cycles
    repeat (3) @(posedge clk);
    #1 chk_state(st1, ref1, "hold");

    // o_data muxes (combinational, no state change)
    x = {$urandom, $urandom};
    d1 = x;
    c1 = IDLE; c1.out_sel = OUT_XOR;  #1 chk64(o1, rate(ref1) ^ x, "out xor");
    c1.out_sel = OUT_RATE;            #1 chk64(o1, rate(ref1), "out rate");
    c1.out_sel = OUT_LOW;             #1 chk64(o1, {ref1.a[31:0], ref1.c[31:0]}, "out low");
    c1.out_sel = OUT_ZERO;            #1 chk64(o1, 64'd0, "out zero");
    c1 = IDLE;

    // absorb with domain separator 01, merged into round 0
    cc = IDLE; cc.in_op = IN_ABSORB; cc.dom_en = 1;
    ds1 = 2'b01; ds8 = 2'b01; d1 = x; d8 = x;
    run_perm1(cc);
    run_perm8(cc);
    ref1 = absorb(ref1, x, 2'b01);
    chk_state(st1, ref1, "absorb P1");
    chk_state(st8, ref1, "absorb P8");

    // decryption: full block then padded block
    for (int pb = 0; pb < 2; pb++) begin
      x = {$urandom, $urandom};
      if (pb) x = (x & ~64'hFFFF) | 64'h0080;   // ciphertext bits, then 1 0000000...
      cc = IDLE; cc.in_op = IN_REPLACE; cc.dom_en = 1; cc.pad = 1'(pb); cc.out_sel = OUT_XOR;
      ds1 = 2'b10; ds8 = 2'b10; d1 = x; d8 = x;
      c1 = cc; #1 chk64(o1, rate(ref1) ^ x, "dec out");
      run_perm1(cc);
      run_perm8(cc);
      ref8 = dec_block(ref1, x, 1'(pb), m);
      ref1 = ref8;
      chk_state(st1, ref1, pb ? "dec pad P1" : "dec P1");
      chk_state(st8, ref1, pb ? "dec pad P8" : "dec P8");
    end

    // hash IV load
    c1 = IDLE; c1.ld = LD_IV; c1.hold = 0;
    @(posedge clk); #1;
    c1 = IDLE;
    raw.a = 0; raw.b = 64'h8040_4000_0000_0000; raw.c = 0; raw.d = 0; raw.e = 0;
    chk_state(st1, raw, "iv");

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
