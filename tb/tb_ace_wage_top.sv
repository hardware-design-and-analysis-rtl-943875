// tb_ace_wage_top: end-to-end test of the two-core top level at its default
// parameters (one round per clock in each core).
//
// The ACE and WAGE ports are driven by two concurrent threads so the cores
// run at the same time on the shared clock:
//   ACE : load, 2 key blocks, 1 AD block, 2 message blocks (encryption),
//         2 finalisation blocks, 2 tag words; then a hash of one block with
//         three squeezed words.
//   WAGE: nine load words, 2 key blocks, 1 AD block, 2 message blocks,
//         2 finalisation blocks, 9 tag words; then the decryption of the
//         same ciphertext with a truncated, padded last block and its tag.
// Every output is compared with ace_ref_pkg / wage_ref_pkg, block latency
// is checked (128 and 112 cycles), random gaps give stalls. Each mechanism
// is counted and must occur at least once, including cycles in which both
// cores are busy together.
module tb_ace_wage_top;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        ace_reset, ace_i_padding, ace_i_valid, ace_o_ready, ace_o_valid;
  logic [1:0]  ace_i_mode, ace_i_dom_sep;
  logic [63:0] ace_i_data, ace_o_data;
  logic        wage_reset, wage_i_padding, wage_i_valid, wage_o_ready, wage_o_valid;
  logic [1:0]  wage_i_mode, wage_i_dom_sep;
  logic [63:0] wage_i_data, wage_o_data;

  ace_wage_top dut (.*);

  int checks = 0, failures = 0;
  localparam int NM = 12;
  int cnt [NM];
  string names [NM] = '{"stall", "ACE load", "ACE encrypt", "ACE tag", "ACE hash absorb",
                        "ACE hash squeeze", "WAGE load", "WAGE encrypt", "WAGE decrypt",
                        "WAGE padded decrypt", "WAGE tag", "both cores busy"};

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (!ace_o_ready && !wage_o_ready) cnt[11]++;

  // ------------------------------------------------------------- ACE side
  task automatic a_send(input logic [1:0] mode, ds, input logic [63:0] d,
                        output logic [63:0] od, output logic ov);
    int gap = $urandom_range(0, 3), guard = 0;
    while (!ace_o_ready && guard < 10000) begin @(posedge clk); #1; guard++; end
    repeat (gap) begin @(posedge clk); #1; end
    if (gap > 0) cnt[0]++;
    ace_i_mode = mode; ace_i_dom_sep = ds; ace_i_padding = 0; ace_i_data = d;
    ace_i_valid = 1; #1;
    od = ace_o_data; ov = ace_o_valid;
    @(posedge clk); #1;
    ace_i_valid = 0;
  endtask

  task automatic a_block(input logic [1:0] mode, ds, input logic [63:0] d,
                         output logic [63:0] od, output logic ov);
    int n = 1;
    a_send(mode, ds, d, od, ov);
    while (!ace_o_ready && n < 1000) begin @(posedge clk); #1; n++; end
    chk(n == 128, $sformatf("ACE latency %0d", n));
  endtask

  task automatic ace_thread();
    import ace_ref_pkg::*;
    logic [63:0] k0, k1, n0, n1, ad, od, t0, t1;
    logic [63:0] m [2];
    logic ov;
    ace_st_t s;
    k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom};
    n0 = {$urandom, $urandom}; n1 = {$urandom, $urandom};
    ad = {$urandom, $urandom};
    a_send(2'b00, 2'b00, k0, od, ov); a_send(2'b00, 2'b00, k1, od, ov);
    a_send(2'b00, 2'b00, n0, od, ov); a_send(2'b00, 2'b00, n1, od, ov);
    cnt[1]++;
    s = ace_ref_pkg::load_ae(k0, k1, n0, n1);
    a_block(2'b00, 2'b00, k0, od, ov); s = absorb(s, k0, 2'b00);
    a_block(2'b00, 2'b00, k1, od, ov); s = absorb(s, k1, 2'b00);
    a_block(2'b00, 2'b01, ad, od, ov); s = absorb(s, ad, 2'b01);
    chk(!ov, "ACE no output for AD");
    foreach (m[i]) begin
      m[i] = {$urandom, $urandom};
      a_block(2'b00, 2'b10, m[i], od, ov);
      chk(ov && od == (rate(s) ^ m[i]), "ACE ciphertext");
      s = absorb(s, m[i], 2'b10); cnt[2]++;
    end
    a_block(2'b00, 2'b00, k0, od, ov); s = absorb(s, k0, 2'b00);
    a_send(2'b00, 2'b00, k1, od, ov);  s = absorb(s, k1, 2'b00);
    while (!ace_o_valid) begin @(posedge clk); #1; end
    t0 = ace_o_data; @(posedge clk); #1; t1 = ace_o_data;
    chk(t0 == rate(s) && t1 == {s.a[31:0], s.c[31:0]}, "ACE tag");
    cnt[3]++;
    @(posedge clk); #1;
    a_send(2'b10, 2'b00, 64'd0, od, ov);
    s = load_hash();
    m[0] = {$urandom, $urandom};
    a_block(2'b10, 2'b00, m[0], od, ov); s = absorb(s, m[0], 2'b00); cnt[4]++;
    for (int i = 0; i < 3; i++) begin
      a_block(2'b11, 2'b00, 64'd0, od, ov);
      chk(ov && od == rate(s), "ACE hash word");
      s = perm(s); cnt[5]++;
    end
  endtask

  // ------------------------------------------------------------ WAGE side
  task automatic w_send(input logic [1:0] mode, ds, input logic pad, input logic [63:0] d,
                        output logic [63:0] od, output logic ov);
    int gap = $urandom_range(0, 3), guard = 0;
    while (!wage_o_ready && guard < 10000) begin @(posedge clk); #1; guard++; end
    repeat (gap) begin @(posedge clk); #1; end
    if (gap > 0) cnt[0]++;
    wage_i_mode = mode; wage_i_dom_sep = ds; wage_i_padding = pad; wage_i_data = d;
    wage_i_valid = 1; #1;
    od = wage_o_data; ov = wage_o_valid;
    @(posedge clk); #1;
    wage_i_valid = 0;
  endtask

  task automatic w_block(input logic [1:0] mode, ds, input logic pad, input logic [63:0] d,
                         output logic [63:0] od, output logic ov);
    int n = 1;
    w_send(mode, ds, pad, d, od, ov);
    while (!wage_o_ready && n < 1000) begin @(posedge clk); #1; n++; end
    chk(n == 112, $sformatf("WAGE latency %0d", n));
  endtask

  task automatic wage_thread();
    import wage_ref_pkg::*;
    w64_t ld [9];
    logic [63:0] k0, k1, ad, od, ct;
    logic [63:0] m [2], c [2];
    logic ov;
    st_t s;
    for (int pass = 0; pass < 2; pass++) begin
      logic dec = (pass == 1);
      if (pass == 0) begin
        foreach (ld[i]) ld[i] = {$urandom, $urandom};
        k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom}; ad = {$urandom, $urandom};
        foreach (m[i]) m[i] = {$urandom, $urandom};
        m[1] = {m[1][63:30], 1'b1, 29'd0};        // 34 data bits, then the pad bit
      end
      foreach (ld[i]) w_send({1'b0, dec}, 2'b00, 0, ld[i], od, ov);
      cnt[6]++;
      s = perm(wage_ref_pkg::load(ld));
      w_block({1'b0, dec}, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00);
      w_block({1'b0, dec}, 2'b00, 0, k1, od, ov); s = absorb(s, k1, 2'b00);
      w_block({1'b0, dec}, 2'b01, 0, ad, od, ov); s = absorb(s, ad, 2'b01);
      foreach (m[i]) begin
        if (!dec) begin
          w_block(2'b00, 2'b10, 0, m[i], od, ov);
          chk(ov && od == (rate(s) ^ m[i]), "WAGE ciphertext");
          c[i] = od;
          s = absorb(s, m[i], 2'b10); cnt[7]++;
        end else begin
          ct = c[i];
          if (i == 1) ct = {c[i][63:30], 1'b1, 29'd0};
          w_block(2'b01, 2'b10, i == 1, ct, od, ov);
          if (i == 1) begin
            chk(ov && od[63:30] == m[i][63:30], "WAGE padded plaintext"); cnt[9]++;
          end else chk(ov && od == m[i], "WAGE plaintext");
          s = dec_block(s, ct, i == 1); cnt[8]++;
        end
      end
      w_block({1'b0, dec}, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00);
      w_send({1'b0, dec}, 2'b00, 0, k1, od, ov);  s = absorb(s, k1, 2'b00);
      while (!wage_o_valid) begin @(posedge clk); #1; end
      for (int i = 0; i < 9; i++) begin
        chk(wage_o_valid && wage_o_data == tag_word(s, i), $sformatf("WAGE tag word %0d", i));
        @(posedge clk); #1;
      end
      cnt[10]++;
    end
  endtask

  initial begin
    foreach (cnt[i]) cnt[i] = 0;
    ace_reset = 1; wage_reset = 1; ace_i_valid = 0; wage_i_valid = 0;
    ace_i_mode = 0; ace_i_dom_sep = 0; ace_i_padding = 0; ace_i_data = 0;
    wage_i_mode = 0; wage_i_dom_sep = 0; wage_i_padding = 0; wage_i_data = 0;
    repeat (2) @(posedge clk); #1;
    ace_reset = 0; wage_reset = 0;
    fork
      ace_thread();
      wage_thread();
    join
    for (int k = 0; k < NM; k++) begin
      checks++;
      if (cnt[k] == 0) begin
        failures++;
        $display("FAIL mechanism '%s' never happened", names[k]);
      end
      $display("%s: %0d", names[k], cnt[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
