// wage_pkg: constants, types and field arithmetic shared by the WAGE modules.
//
// WAGE works on 37 stages of 7 bits, S0..S36, each an element of GF(2^7).
// Elements are written as 7-bit integers whose most significant bit is the
// coefficient of w^0 and whose least significant bit is the coefficient of
// w^6, w being a root of x^7 + x^3 + x^2 + x + 1. In this representation
// multiplication by w is a right shift whose carry-out (old bit 0, the
// coefficient of w^6) is folded back as 0x78.
//
// The decimated Welch-Gong permutation is
//     WGP(x) = y + (y+1)^33 + (y+1)^39 + (y+1)^41 + (y+1)^104,  y = x^13
// (the WG permutation of GF(2^7), exponents 2^k+1, 2^2k+2^k+1, 2^2k-2^k+1,
// 2^2k+2^k-1 with k = 5, decimation 13). wgp_table() evaluates it for all
// 128 inputs at elaboration time, so a design that indexes the table gets a
// constant array that synthesis turns into gates, as the paper describes.
// The field polynomial, bit order and decimation come from the WAGE
// specification, not from the paper.
package wage_pkg;

  localparam int unsigned STAGES      = 37;
  localparam int unsigned PERM_ROUNDS = 111;
  localparam int unsigned PERM_SLOTS  = PERM_ROUNDS + 1;  // + input slot
  localparam int unsigned LOAD_WORDS  = 9;   // longest loading region
  localparam int unsigned TAG_WORDS   = 9;   // longest tag region

  typedef logic [6:0] gf7_t;
  typedef gf7_t [STAGES-1:0] wage_state_t;

  // Rate stages in the order of the 7-bit fragments D0..D9 of i_data.
  typedef int unsigned idx_t;
  localparam idx_t RATE_STAGE [10] = '{8, 9, 15, 16, 18, 27, 28, 34, 35, 36};

  // Domain separators.
  localparam logic [1:0] DS_KEY = 2'b00;
  localparam logic [1:0] DS_AD  = 2'b01;
  localparam logic [1:0] DS_MSG = 2'b10;

  typedef enum logic [1:0] {
    OP_HOLD = 2'd0,   // lfsr_en low: nothing changes
    OP_RUN  = 2'd1,   // input slot (optional) and up to P rounds
    OP_LOAD = 2'd2,   // region-wise shift, D inputs fed in directly
    OP_TAG  = 2'd3    // shift towards S0, SB and WGP off, O outputs
  } wage_op_e;

  typedef enum logic [1:0] {
    IN_NONE    = 2'd0,
    IN_ABSORB  = 2'd1,   // rate stages ^= D
    IN_REPLACE = 2'd2    // rate stages  = D (decryption)
  } wage_in_e;

  typedef struct packed {
    wage_op_e op;
    wage_in_e in_op;
    logic     pad;      // padded last ciphertext block
    logic     dom_en;   // S0[1:0] ^= i_dom_sep
    logic     out_en;   // o_data = O outputs (else 0)
  } wage_ctrl_t;

  // Bit-order reversal between the spec representation and the polynomial
  // basis with bit i = coefficient of w^i.
  function automatic gf7_t rev7(input gf7_t a);
    gf7_t r;
    for (int i = 0; i < 7; i++) r[i] = a[6-i];
    return r;
  endfunction

  // Product in the polynomial basis, modulo x^7 + x^3 + x^2 + x + 1.
  function automatic gf7_t gf_mul_poly(input gf7_t a, input gf7_t b);
    logic [12:0] p;
    p = '0;
    for (int i = 0; i < 7; i++) if (b[i]) p ^= 13'(a) << i;
    for (int i = 12; i >= 7; i--) if (p[i]) p ^= 13'h8F << (i - 7);
    return p[6:0];
  endfunction

  function automatic gf7_t gf_pow_poly(input gf7_t a, input int unsigned e);
    gf7_t r;
    r = 7'd1;
    for (int unsigned i = 0; i < e; i++) r = gf_mul_poly(r, a);
    return r;
  endfunction

  function automatic gf7_t wgp_value(input gf7_t x);
    gf7_t y, z;
    y = gf_pow_poly(rev7(x), 13);
    z = y ^ 7'd1;
    return rev7(y ^ gf_pow_poly(z, 33) ^ gf_pow_poly(z, 39)
                  ^ gf_pow_poly(z, 41) ^ gf_pow_poly(z, 104));
  endfunction

  typedef gf7_t wgp_table_t [128];

  function automatic wgp_table_t wgp_table();
    wgp_table_t t;
    for (int i = 0; i < 128; i++) t[i] = wgp_value(gf7_t'(i));
    return t;
  endfunction

  // Multiplication by w in the spec representation.
  function automatic gf7_t mul_omega(input gf7_t x);
    return (x >> 1) ^ (x[0] ? 7'h78 : 7'h00);
  endfunction

endpackage
