// tb_wage_top: end-to-end test of the WAGE core at its default size
// (P = 1) and unrolled (P = 2, 3, 4, 6, 8), one wage_top_driver per size.
// Fails if any check fails or a mechanism (stall, load, key/AD/message
// blocks, decryption, padded decryption, tag output) never occurred.
module tb_wage_top;
  localparam int NP = 6;
  localparam int unsigned PS [NP] = '{1, 2, 3, 4, 6, 8};
  logic [NP-1:0] done;
  int ch [NP], fl [NP];
  int cnt [NP][8];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NP; g++) begin : g_p
    wage_top_driver #(.P(PS[g])) u_drv (
      .done(done[g]), .checks(ch[g]), .failures(fl[g]),
      .n_stall(cnt[g][0]), .n_enc(cnt[g][1]), .n_dec(cnt[g][2]), .n_pad(cnt[g][3]),
      .n_ad(cnt[g][4]), .n_key(cnt[g][5]), .n_tag(cnt[g][6]), .n_load(cnt[g][7]));
  end

  initial begin
    string names [8] = '{"stall", "encrypt", "decrypt", "padded decrypt", "AD",
                         "key block", "tag", "load"};
    wait (&done);
    for (int g = 0; g < NP; g++) begin
      checks += ch[g]; failures += fl[g];
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (cnt[g][k] == 0) begin
          failures++;
          $display("FAIL P=%0d: mechanism '%s' never happened", PS[g], names[k]);
        end
      end
      $display("P=%0d: stalls %0d, enc %0d, dec %0d, padded %0d, tags %0d, loads %0d",
               PS[g], cnt[g][0], cnt[g][1], cnt[g][2], cnt[g][3], cnt[g][6], cnt[g][7]);
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
