// ace_top_driver: end-to-end stimulus and checking for one ace_top
// instance with P rounds per clock (used by tb_ace_top for several P).
//
// Runs, with random idle gaps before each block (stalls), a full AEAD
// encryption (load, 2 key blocks, 2 AD blocks, 3 message blocks, 2
// finalisation blocks, 2 tag words), the matching decryption of the same
// ciphertext with the last block truncated and padded, and a hash of two
// blocks with four squeezed words. Every output word is compared with the
// reference model; the latency from accepting a block to o_ready is
// checked against 128/P cycles. Counts how often each mechanism occurred.
module ace_top_driver #(
  parameter int unsigned P = 1
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stall, n_enc, n_dec, n_pad, n_ad, n_key, n_tag, n_absorb, n_squeeze, n_load
);
  import ace_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic reset, i_padding, i_valid, o_ready, o_valid;
  logic [1:0] i_mode, i_dom_sep;
  logic [63:0] i_data, o_data;

  ace_top #(.P(P)) dut (.clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_data, .i_valid,
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

  // Present one word; returns the same-cycle output.
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

  // Present a block and check the permutation latency.
  task automatic block(input logic [1:0] mode, ds, input logic pad, input logic [63:0] d,
                       output logic [63:0] od, output logic ov);
    int n;
    send(mode, ds, pad, d, od, ov);
    n = 1;
    while (!o_ready && n < 1000) begin @(posedge clk); #1; n++; end
    chk(n == 128 / P, $sformatf("block latency %0d", n));
  endtask

  task automatic load_ae(input logic [63:0] k0, k1, n0, n1);
    logic [63:0] od; logic ov;
    send(2'b00, 2'b00, 0, k0, od, ov); send(2'b00, 2'b00, 0, k1, od, ov);
    send(2'b00, 2'b00, 0, n0, od, ov); send(2'b00, 2'b00, 0, n1, od, ov);
    n_load++;
  endtask

  task automatic read_tag(output logic [63:0] t0, t1);
    int guard = 0;
    while (!o_valid && guard < 1000) begin @(posedge clk); #1; guard++; end
    t0 = o_data; @(posedge clk); #1;
    chk(o_valid, "second tag word valid");
    t1 = o_data; @(posedge clk); #1;
    chk(!o_valid, "two tag words only");
    n_tag++;
  endtask

  initial begin
    logic [63:0] k0, k1, n0, n1, od, t0, t1;
    logic [63:0] ad [2], m [3], c [3];
    logic ov;
    ace_st_t s;
    int keep;
    done = 0; checks = 0; failures = 0;
    {n_stall, n_enc, n_dec, n_pad, n_ad, n_key, n_tag, n_absorb, n_squeeze, n_load} = '0;
    reset = 1; i_valid = 0; i_mode = 0; i_dom_sep = 0; i_padding = 0; i_data = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    k0 = {$urandom, $urandom}; k1 = {$urandom, $urandom};
    n0 = {$urandom, $urandom}; n1 = {$urandom, $urandom};
    foreach (ad[i]) ad[i] = {$urandom, $urandom};
    foreach (m[i])  m[i]  = {$urandom, $urandom};
    keep = 40;                                   // last message block: 40 bits
    m[2] = (m[2] & ~((64'd1 << (64 - keep)) - 1)) | (64'd1 << (63 - keep));

    // ---------------- encryption ----------------
    load_ae(k0, k1, n0, n1);
    wait_ready();
    s = ace_ref_pkg::load_ae(k0, k1, n0, n1);
    block(2'b00, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00); n_key++;
    block(2'b00, 2'b00, 0, k1, od, ov); s = absorb(s, k1, 2'b00); n_key++;
    chk(!ov && od == 0, "no output for key blocks");
    foreach (ad[i]) begin
      block(2'b00, 2'b01, 0, ad[i], od, ov); s = absorb(s, ad[i], 2'b01); n_ad++;
      chk(!ov && od == 0, "no output for AD");
    end
    foreach (m[i]) begin
      block(2'b00, 2'b10, i == 2, m[i], od, ov);
      chk(ov && od == (rate(s) ^ m[i]), $sformatf("ciphertext %0d", i));
      c[i] = od;
      s = absorb(s, m[i], 2'b10); n_enc++;
    end
    send(2'b00, 2'b00, 0, k0, od, ov); s = absorb(s, k0, 2'b00);
    wait_ready();
    send(2'b00, 2'b00, 0, k1, od, ov); s = absorb(s, k1, 2'b00);
    read_tag(t0, t1);
    chk(t0 == rate(s) && t1 == {s.a[31:0], s.c[31:0]}, "tag");

    // ---------------- decryption, last block truncated + padded ----------
    begin
      logic [63:0] ct, mo, dt0, dt1;
      wait_ready();
      load_ae(k0, k1, n0, n1);
      wait_ready();
      block(2'b01, 2'b00, 0, k0, od, ov);
      block(2'b01, 2'b00, 0, k1, od, ov);
      foreach (ad[i]) block(2'b01, 2'b01, 0, ad[i], od, ov);
      foreach (c[i]) begin
        ct = c[i];
        if (i == 2) ct = (c[i] & ~((64'd1 << (64 - keep)) - 1)) | (64'd1 << (63 - keep));
        block(2'b01, 2'b10, i == 2, ct, od, ov);
        mo = od;
        if (i == 2) begin
          chk(ov && mo[63 -: 40] == m[i][63 -: 40], "plaintext of padded block");
          n_pad++;
        end else chk(ov && mo == m[i], "plaintext");
        n_dec++;
      end
      send(2'b01, 2'b00, 0, k0, od, ov);
      wait_ready();
      send(2'b01, 2'b00, 0, k1, od, ov);
      read_tag(dt0, dt1);
      chk(dt0 == t0 && dt1 == t1, "decryption tag equals encryption tag");
    end

    // ---------------- hash ----------------
    begin
      logic [63:0] hm [2];
      wait_ready();
      send(2'b10, 2'b00, 0, 64'd0, od, ov); n_load++;
      s = load_hash();
      foreach (hm[i]) begin
        hm[i] = {$urandom, $urandom};
        block(2'b10, 2'b00, 0, hm[i], od, ov); s = absorb(s, hm[i], 2'b00); n_absorb++;
      end
      for (int i = 0; i < 4; i++) begin
        block(2'b11, 2'b00, 0, {$urandom, $urandom}, od, ov);
        chk(ov && od == rate(s), $sformatf("hash word %0d", i));
        s = perm(s); n_squeeze++;
      end
    end
    done = 1;
  end
endmodule
