// wage_top_driver: end-to-end stimulus and checking for one wage_top
// instance with P slots per clock (used by tb_wage_top for several P).
//
// With random idle gaps before each word (stalls) it runs an encryption
// (nine load words, 2 key blocks, 2 AD blocks, 3 message blocks, 2
// finalisation key blocks, 9 tag words) and the matching decryption with
// the last ciphertext block truncated and padded. Every output word is
// compared with wage_ref_pkg; the block latency (accept cycle to the next
// o_ready) must be ceil(112/P) cycles. Counts each mechanism.
module wage_top_driver #(
  parameter int unsigned P = 1
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stall, n_enc, n_dec, n_pad, n_ad, n_key, n_tag, n_load
);
  import wage_ref_pkg::*;

  localparam int NCYC = (112 + P - 1) / P;

  logic clk = 0;
  always #5 clk = ~clk;

  logic reset, i_padding, i_valid, o_ready, o_valid;
  logic [1:0] i_mode, i_dom_sep;
  logic [63:0] i_data, o_data;

  wage_top #(.P(P)) dut (.clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_data, .i_valid,
                         .o_ready, .o_data, .o_valid);

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL P=%0d %s at %0t", P, what, $time);
    end
  endtask

  task automatic wait_ready();
    int guard = 0;
    while (!o_ready && guard < 10000) begin @(posedge clk); #1; guard++; end
  endtask

  task automatic send(input logic [1:0] mode, ds, input logic pad, input logic [63:0] d,
                      output logic [63:0] od, output logic ov);
    int gap;
    wait_ready();
    gap = $urandom_range(0, 3);
    repeat (gap) begin @(posedge clk); #1; end
    if (gap > 0) n_stall++;
    i_mode = mode; i_dom_sep = ds; i_padding = pad; i_data = d; i_valid = 1;
    #1;
    od = o_data; ov = o_valid;
    @(posedge clk); #1;
    i_valid = 0; i_data = {$urandom, $urandom};
  endtask

  task automatic block(input logic [1:0] mode, ds, input logic pad, input logic [63:0] d,
                       output logic [63:0] od, output logic ov);
    int n;
    send(mode, ds, pad, d, od, ov);
    n = 1;
    while (!o_ready && n < 1000) begin @(posedge clk); #1; n++; end
    chk(n == NCYC, $sformatf("block latency %0d", n));
  endtask

  task automatic load(input logic [1:0] mode, input w64_t w [9]);
    logic [63:0] od; logic ov;
    foreach (w[i]) send(mode, 2'b00, 0, w[i], od, ov);
    n_load++;
  endtask

  task automatic read_tag(output w64_t t [9]);
    int guard = 0;
    while (!o_valid && guard < 1000) begin @(posedge clk); #1; guard++; end
    for (int i = 0; i < 9; i++) begin
      chk(o_valid, "tag word valid");
      t[i] = o_data; @(posedge clk); #1;
    end
    chk(!o_valid, "nine tag words only");
    n_tag++;
  endtask

  initial begin
    w64_t ld [9], t [9], dt [9];
    logic [63:0] k0, k1, od, ct;
    logic [63:0] ad [2], m [3], c [3];
    logic ov;
    st_t s;
    int keep;
    done = 0; checks = 0; failures = 0;
    {n_stall, n_enc, n_dec, n_pad, n_ad, n_key, n_tag, n_load} = '0;
    reset = 1; i_valid = 0; i_mode = 0; i_dom_sep = 0; i_padding = 0; i_data = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    foreach (ld[i]) ld[i] = {$urandom, $urandom};
    k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom};
    foreach (ad[i]) ad[i] = {$urandom, $urandom};
    foreach (m[i])  m[i]  = {$urandom, $urandom};
    keep = 23;
    m[2] = (m[2] & ~((64'd1 << (64 - keep)) - 1)) | (64'd1 << (63 - keep));

    // ---------------- encryption ----------------
    load(2'b00, ld);
    s = perm(wage_ref_pkg::load(ld));
    wait_ready();
    block(2'b00, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00); n_key++;
    chk(!ov && od == 0, "no output for key blocks");
    block(2'b00, 2'b00, 0, k1, od, ov); s = absorb(s, k1, 2'b00); n_key++;
    foreach (ad[i]) begin
      block(2'b00, 2'b01, 0, ad[i], od, ov); s = absorb(s, ad[i], 2'b01); n_ad++;
      chk(!ov && od == 0, "no output for AD");
    end
    foreach (m[i]) begin
      block(2'b00, 2'b10, 0, m[i], od, ov);
      chk(ov && od == (rate(s) ^ m[i]), $sformatf("ciphertext %0d", i));
      c[i] = od;
      s = absorb(s, m[i], 2'b10); n_enc++;
    end
    block(2'b00, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00);
    send(2'b00, 2'b00, 0, k1, od, ov);  s = absorb(s, k1, 2'b00);
    read_tag(t);
    for (int i = 0; i < 9; i++) chk(t[i] == tag_word(s, i), $sformatf("tag word %0d", i));

    // ---------------- decryption, last block truncated + padded ----------
    wait_ready();
    load(2'b01, ld);
    s = perm(wage_ref_pkg::load(ld));
    wait_ready();
    block(2'b01, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00);
    block(2'b01, 2'b00, 0, k1, od, ov); s = absorb(s, k1, 2'b00);
    foreach (ad[i]) begin
      block(2'b01, 2'b01, 0, ad[i], od, ov); s = absorb(s, ad[i], 2'b01);
    end
    foreach (c[i]) begin
      ct = c[i];
      if (i == 2) ct = (c[i] & ~((64'd1 << (64 - keep)) - 1)) | (64'd1 << (63 - keep));
      block(2'b01, 2'b10, i == 2, ct, od, ov);
      if (i == 2) begin
        chk(ov && od[63 -: 23] == m[i][63 -: 23], "plaintext of padded block");
        n_pad++;
      end else chk(ov && od == m[i], "plaintext");
      s = dec_block(s, ct, i == 2);
      n_dec++;
    end
    block(2'b01, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00);
    send(2'b01, 2'b00, 0, k1, od, ov);  s = absorb(s, k1, 2'b00);
    read_tag(dt);
    for (int i = 0; i < 9; i++) begin
      chk(dt[i] == tag_word(s, i), $sformatf("decryption tag word %0d", i));
      chk(dt[i] == t[i], $sformatf("decryption tag equals encryption tag %0d", i));
    end
    wait_ready();
    done = 1;
  end
endmodule
