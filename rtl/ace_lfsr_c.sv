// ace_lfsr_c: round- and step-constant generator of ACE.
//
// A 7-bit LFSR over the sequence q(n+7) = q(n) ^ q(n+1) (polynomial
// x^7 + x + 1), initialised to all ones. Every clock it advances by 3*P
// sequence elements, producing one round-constant bit per SB-64 box per
// round: for round k of the cycle, rc[k][j] = e[3k+j], j = 0,1,2 for the
// boxes on A, C and E, where e[0..6] is the state and e[7..3P+6] the 3P
// feedback values. In the last cycle of a step the ten elements
// e[3P-3 .. 3P+6] (the last three round-constant bits, the three final
// feedbacks and the rest) are split into three overlapping 8-bit step
// constants sc[j][b] = e[3(P-1) + j + b]. With P = 1 this is the paper's
// "three feedback values together with all 7 state bits yield 10
// consecutive sequence elements"; for P > 1 the feedback is replicated
// (3P feedbacks in total), as for the unrolled versions.
//
// The polynomial, the all-ones seed and the interleaving of the three
// constants are taken from the ACE specification, not from the paper.
//
// Interface: lfsr_c_reset (synchronous) reloads the seed, lfsr_c_en
// advances the sequence. Outputs are combinational from the state.
module ace_lfsr_c #(
  parameter int unsigned P = 1          // rounds per clock: 1, 2, 4 or 8
) (
  input  logic                clk,
  input  logic                lfsr_c_reset,
  input  logic                lfsr_c_en,
  output logic [P-1:0][2:0]   rc,       // rc[k][j]: round k, box j (A,C,E)
  output logic [2:0][7:0]     sc        // sc[j]: step constant for B, D, E
);
  localparam int unsigned NE = 3*P + 7;

  logic [6:0]    q;
  logic [NE-1:0] e;

  assign e[6:0] = q;
  for (genvar n = 7; n < NE; n++) begin : g_fb
    assign e[n] = e[n-7] ^ e[n-6];
  end

  always_comb begin
    for (int k = 0; k < P; k++)
      for (int j = 0; j < 3; j++) rc[k][j] = e[3*k + j];
    for (int j = 0; j < 3; j++)
      for (int b = 0; b < 8; b++) sc[j][b] = e[3*(P-1) + j + b];
  end

  always_ff @(posedge clk) begin
    if (lfsr_c_reset)   q <= '1;
    else if (lfsr_c_en) q <= e[3*P +: 7];
  end
endmodule
