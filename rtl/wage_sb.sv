// wage_sb: the 7-bit S-box SB of WAGE, fully unrolled.
//
// The paper states that SB is a 7-bit permutation defined as five
// iterations of a smaller function and built as purely combinational
// logic, but it does not define that function. This module therefore
// implements a stand-in with exactly that structure: five unrolled
// iterations of an invertible step
//     Q(x) = { x[0] ^ (x[2] & x[3]) ^ (x[4] & x[5]) , x[6:1] }
// (a 7-bit nonlinear feedback shift, invertible because x[0] is recovered
// from the new bit 6 and the shifted bits), followed by XOR with 0x2e so
// that SB(0) = 0x2e. It is a permutation of GF(2^7) with the right cost and
// depth class, but it is NOT the S-box of the WAGE specification, so the
// WAGE core built with it does not reproduce WAGE ciphertexts. Replace the
// body of sb_q() with the specification's step to obtain the real cipher.
module wage_sb (
  input  logic [6:0] x,
  output logic [6:0] y
);
  function automatic logic [6:0] sb_q(input logic [6:0] v);
    return {v[0] ^ (v[2] & v[3]) ^ (v[4] & v[5]), v[6:1]};
  endfunction

  logic [5:0][6:0] t;

  assign t[0] = x;
  for (genvar i = 0; i < 5; i++) begin : g_iter
    assign t[i+1] = sb_q(t[i]);
  end
  assign y = t[5] ^ 7'h2e;
endmodule
