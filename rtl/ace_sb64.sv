// ace_sb64: one round of the 64-bit Simeck box SB-64_1 used by ACE.
//
// The 64-bit input is split into a left half x1 = x[63:32] and a right half
// x0 = x[31:0]. One unkeyed Simeck round computes
//     f(x1) = (x1 <<< 5 & x1) ^ (x1 <<< 1)
//     y     = { f(x1) ^ x0 ^ 0xfffffffe ^ rc , x1 }
// i.e. a Feistel step whose round key is the constant 0xfffffffe with its
// least significant bit replaced by the 1-bit round constant rc. The paper
// describes SB-64 as left cyclic shifts, AND and XOR gates parameterised by
// one round-constant bit; the rotation amounts and the 0xfffffffe constant
// are those of Simeck and of the ACE specification.
//
// Purely combinational; eight chained instances make the full 8-round
// SB-64 box. Critical path: one AND and XOR tree per round.
module ace_sb64
  import ace_pkg::*;
(
  input  logic [63:0] x,
  input  logic        rc,
  output logic [63:0] y
);
  logic [31:0] x1, x0, f;

  always_comb begin
    x1 = x[63:32];
    x0 = x[31:0];
    f  = ({x1[26:0], x1[31:27]} & x1) ^ {x1[30:0], x1[31]};
    y  = {f ^ x0 ^ {SB_CONST[31:1], rc}, x1};
  end
endmodule
