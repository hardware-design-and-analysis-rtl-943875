// wage_lfsr_c: round-constant generator of WAGE.
//
// A 7-bit LFSR over a(n+7) = a(n) ^ a(n+1) (x^7 + x + 1), 2-way parallel:
// each round consumes two new sequence elements, and round t uses the
// 7-bit windows rc0 = a(2t .. 2t+6) and rc1 = a(2t+1 .. 2t+7) (bit j of
// the constant is the j-th element of the window). With P rounds per clock
// the feedback is replicated 2P times.
//
// The permutation is scheduled in slots: slot 0 of the first cycle is the
// cycle that absorbs input, slots 1..111 are rounds 0..110. Slot k of a
// cycle therefore needs the constants of round (cycle*P + k - 1), so the
// register is seeded with the sequence rolled back one round: a(-2..4) =
// 1,0,1,1,1,1,1 for the all-ones start a(0..6) = 1. The constants of slot 0
// of the first cycle are not used.
//
// The polynomial, the all-ones start and the windowing are this design's
// reading of "a 7-bit LFSR in a 2-way parallel configuration with two XOR
// gates for the two feedbacks"; the paper gives no more.
module wage_lfsr_c #(
  parameter int unsigned P = 1
) (
  input  logic                clk,
  input  logic                lfsr_c_reset,
  input  logic                lfsr_c_en,
  output logic [P-1:0][6:0]   rc0,
  output logic [P-1:0][6:0]   rc1
);
  localparam int unsigned NE   = 2*P + 7;
  localparam logic [6:0]  SEED = 7'b1111101;  // bit n = a(n-2)

  logic [6:0]    q;
  logic [NE-1:0] e;

  assign e[6:0] = q;
  for (genvar n = 7; n < NE; n++) begin : g_fb
    assign e[n] = e[n-7] ^ e[n-6];
  end

  for (genvar k = 0; k < P; k++) begin : g_rc
    assign rc0[k] = e[2*k     +: 7];
    assign rc1[k] = e[2*k + 1 +: 7];
  end

  always_ff @(posedge clk) begin
    if (lfsr_c_reset)   q <= SEED;
    else if (lfsr_c_en) q <= e[2*P +: 7];
  end
endmodule
