// ace_ref_pkg: untimed reference model of the ACE core for the testbenches.
//
// Written straight from the algorithm description, independently of the
// RTL structure: the constant sequence q is generated once as a bit array,
// round r of step s uses rc_j = q[24s + 3r + j] and the step constants
// sc_j[b] = q[24s + 21 + j + b]; the permutation is 16 steps of 8 Simeck
// rounds on A, C, E followed by the step additions and the register
// permutation. The sponge functions follow the block sequence of the core:
// load (A,C,B,E = K0,K1,N0,N1; D = 0), initial permutation, then
// "absorb block with domain separator, permute" for every block.
package ace_ref_pkg;

  typedef logic [63:0] w64_t;
  typedef struct { w64_t a, b, c, d, e; } ace_st_t;

  function automatic logic qbit(input int n);
    logic [0:399] q;
    for (int i = 0; i < 7; i++) q[i] = 1'b1;
    for (int i = 7; i < 400; i++) q[i] = q[i-7] ^ q[i-6];
    return q[n];
  endfunction

  function automatic logic [31:0] rol(input logic [31:0] x, input int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  function automatic w64_t simeck(input w64_t x, input logic rc);
    logic [31:0] l, r, nl;
    l  = x[63:32];
    r  = x[31:0];
    nl = (rol(l, 5) & l) ^ rol(l, 1) ^ r ^ 32'hFFFF_FFFE ^ {31'd0, rc};
    return {nl, l};
  endfunction

  function automatic ace_st_t perm(input ace_st_t s);
    ace_st_t t;
    logic [7:0] sc0, sc1, sc2;
    for (int st = 0; st < 16; st++) begin
      for (int r = 0; r < 8; r++) begin
        s.a = simeck(s.a, qbit(24*st + 3*r + 0));
        s.c = simeck(s.c, qbit(24*st + 3*r + 1));
        s.e = simeck(s.e, qbit(24*st + 3*r + 2));
      end
      for (int b = 0; b < 8; b++) begin
        sc0[b] = qbit(24*st + 21 + b);
        sc1[b] = qbit(24*st + 22 + b);
        sc2[b] = qbit(24*st + 23 + b);
      end
      s.b = s.b ^ s.c ^ {{56{1'b1}}, sc0};
      s.d = s.d ^ s.e ^ {{56{1'b1}}, sc1};
      s.e = s.e ^ s.a ^ {{56{1'b1}}, sc2};
      t.a = s.d; t.b = s.c; t.c = s.a; t.d = s.e; t.e = s.b;
      s = t;
    end
    return s;
  endfunction

  function automatic w64_t rate(input ace_st_t s);
    return {s.a[63:32], s.c[63:32]};
  endfunction

  function automatic ace_st_t set_rate(input ace_st_t s, input w64_t r);
    s.a[63:32] = r[63:32];
    s.c[63:32] = r[31:0];
    return s;
  endfunction

  function automatic ace_st_t load_ae(input w64_t k0, k1, n0, n1);
    ace_st_t s;
    s.a = k0; s.c = k1; s.b = n0; s.e = n1; s.d = '0;
    return perm(s);
  endfunction

  function automatic ace_st_t load_hash();
    ace_st_t s;
    s.a = '0; s.c = '0; s.d = '0; s.e = '0;
    s.b = 64'h8040_4000_0000_0000;
    return perm(s);
  endfunction

  // Absorb one block (XOR into the rate) with a domain separator.
  function automatic ace_st_t absorb(input ace_st_t s, input w64_t x, input logic [1:0] ds);
    s = set_rate(s, rate(s) ^ x);
    s.e[1:0] ^= ds;
    return perm(s);
  endfunction

  // Decrypt one block: out = rate ^ c; the rate becomes c, or for a padded
  // block (c given as ciphertext bits then 10*) c above the last 1 and
  // rate ^ pad from that 1 down.
  function automatic ace_st_t dec_block(input ace_st_t s, input w64_t c, input logic pad,
                                        output w64_t m);
    w64_t r, nr;
    int   last;
    r = rate(s);
    m = r ^ c;
    nr = c;
    if (pad) begin
      last = 0;
      for (int i = 63; i >= 0; i--) if (c[i]) last = i;
      for (int i = 0; i < 64; i++) if (i <= last) nr[i] = r[i] ^ c[i];
    end
    s = set_rate(s, nr);
    s.e[1:0] ^= 2'b10;
    return perm(s);
  endfunction

endpackage
