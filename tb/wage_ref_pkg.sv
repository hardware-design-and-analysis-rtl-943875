// wage_ref_pkg: untimed reference model of the WAGE core for testbenches.
//
// Independent of the RTL's structure: field arithmetic is done bit-serially
// in the 7-bit representation used by the core (MSB = coefficient of w^0,
// field polynomial x^7 + x^3 + x^2 + x + 1), WGP by square-and-multiply,
// the round constants from an explicit bit array a(n) with a(0..6) = 1 and
// a(n+7) = a(n) ^ a(n+1), round t using a(2t..2t+6) and a(2t+1..2t+7). The
// sponge helpers follow the core's block sequence: nine load words shifted
// into five regions, initial permutation, then "input slot + 111 rounds"
// per block, nine tag words.
package wage_ref_pkg;

  typedef logic [6:0] g_t;
  typedef g_t st_t [37];
  typedef logic [63:0] w64_t;

  localparam int RS [10] = '{8, 9, 15, 16, 18, 27, 28, 34, 35, 36};

  // multiply in the core's representation: bit (6-i) holds coefficient i
  function automatic g_t gmul(input g_t x, input g_t y);
    logic [6:0] a, b, r;
    logic hi;
    for (int i = 0; i < 7; i++) begin a[i] = x[6-i]; b[i] = y[6-i]; end
    r = '0;
    for (int i = 0; i < 7; i++) begin
      if (b[i]) r ^= a;
      hi = a[6];
      a = {a[5:0], 1'b0};
      if (hi) a ^= 7'b0001111;     // x^7 = x^3 + x^2 + x + 1
    end
    return {r[0], r[1], r[2], r[3], r[4], r[5], r[6]};
  endfunction

  function automatic g_t gpow(input g_t x, input int e);
    g_t r = 7'b1000000, bse = x;   // 1 in the reversed representation
    while (e > 0) begin
      if ((e & 1) != 0) r = gmul(r, bse);
      bse = gmul(bse, bse);
      e >>= 1;
    end
    return r;
  endfunction

  localparam g_t ONE   = 7'b1000000;
  localparam g_t OMEGA = 7'b0100000;

  function automatic g_t wgp(input g_t x);
    g_t y, z;
    y = gpow(x, 13);
    z = y ^ ONE;
    return y ^ gpow(z, 33) ^ gpow(z, 39) ^ gpow(z, 41) ^ gpow(z, 104);
  endfunction

  // Stand-in S-box of the core: five NLFSR steps then XOR 0x2e.
  function automatic g_t sb(input g_t x);
    logic nb;
    for (int i = 0; i < 5; i++) begin
      nb = x[0] ^ (x[2] & x[3]) ^ (x[4] & x[5]);
      x = x >> 1;
      x[6] = nb;
    end
    return x ^ 7'h2e;
  endfunction

  function automatic logic abit(input int n);
    logic a [0:600];
    for (int i = 0; i < 7; i++) a[i] = 1'b1;
    for (int i = 7; i <= 600; i++) a[i] = a[i-7] ^ a[i-6];
    return a[n];
  endfunction

  function automatic g_t rc_win(input int base);
    g_t r;
    for (int j = 0; j < 7; j++) r[j] = abit(base + j);
    return r;
  endfunction

  function automatic st_t round(input st_t s, input int t);
    st_t n;
    g_t fb;
    fb = s[31] ^ s[30] ^ s[26] ^ s[24] ^ s[19] ^ s[13] ^ s[12] ^ s[8] ^ s[6]
       ^ gmul(s[0], OMEGA);
    for (int i = 0; i < 36; i++) n[i] = s[i+1];
    n[36] = fb ^ wgp(s[36]) ^ rc_win(2*t + 1);
    n[29] = s[30] ^ sb(s[34]);
    n[23] = s[24] ^ sb(s[27]);
    n[18] = s[19] ^ wgp(s[18]) ^ rc_win(2*t);
    n[10] = s[11] ^ sb(s[15]);
    n[4]  = s[5]  ^ sb(s[8]);
    return n;
  endfunction

  function automatic st_t perm(input st_t s);
    for (int t = 0; t < 111; t++) s = round(s, t);
    return s;
  endfunction

  function automatic w64_t rate(input st_t s);
    w64_t r;
    r[63] = s[36][0];
    for (int k = 0; k < 9; k++) r[7*k +: 7] = s[RS[k]];
    return r;
  endfunction

  function automatic st_t set_rate(input st_t s, input w64_t r);
    s[36][0] = r[63];
    for (int k = 0; k < 9; k++) s[RS[k]] = r[7*k +: 7];
    return s;
  endfunction

  function automatic st_t load(input w64_t w [9]);
    st_t s;
    for (int i = 0; i < 37; i++) s[i] = '0;
    for (int c = 0; c < 9; c++) begin
      st_t n;
      for (int i = 0; i < 36; i++) n[i] = s[i+1];
      n[8]  = w[c][6:0];
      n[16] = w[c][27:21];
      n[18] = w[c][34:28];
      n[27] = w[c][41:35];
      n[36] = w[c][63:57];
      s = n;
    end
    return s;   // before the initial permutation
  endfunction

  function automatic st_t absorb(input st_t s, input w64_t x, input logic [1:0] ds);
    s = set_rate(s, rate(s) ^ x);
    s[0][1:0] ^= ds;
    return perm(s);
  endfunction

  function automatic st_t dec_block(input st_t s, input w64_t c, input logic pad);
    w64_t r, nr;
    int last;
    r = rate(s);
    nr = c;
    if (pad) begin
      last = 0;
      for (int i = 63; i >= 0; i--) if (c[i]) last = i;
      for (int i = 0; i <= last; i++) nr[i] = r[i] ^ c[i];
    end
    s = set_rate(s, nr);
    s[0][1:0] ^= 2'b10;
    return perm(s);
  endfunction

  // Tag word c of 9: O1 = S9, O3 = S16, O6 = S28 after c shifts.
  function automatic w64_t tag_word(input st_t s, input int c);
    w64_t w;
    for (int k = 0; k < c; k++) begin
      st_t n;
      for (int i = 0; i < 36; i++) n[i] = s[i+1];
      n[36] = s[36];
      s = n;
    end
    w = '0;
    w[13:7] = s[9]; w[27:21] = s[16]; w[48:42] = s[28];
    return w;
  endfunction

endpackage
