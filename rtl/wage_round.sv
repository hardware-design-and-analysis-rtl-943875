// wage_round: one round of the WAGE permutation (combinational helper).
//
// Stage i takes the value of stage i+1, except the six nonlinearly updated
// stages (Fig. 2 of the design description):
//   S36' = fb ^ WGP(S36) ^ rc1,
//          fb = S31^S30^S26^S24^S19^S13^S12^S8^S6^(w*S0)
//   S29' = S30 ^ SB(S34)          S23' = S24 ^ SB(S27)
//   S18' = S19 ^ WGP(S18) ^ rc0   S10' = S11 ^ SB(S15)
//   S4'  = S5  ^ SB(S8)
// The tap list is the paper's feedback polynomial; the stage positions of
// WGP, SB and the round constants are those printed in Figs. 2 and 12.
module wage_round
  import wage_pkg::*;
(
  input  wage_state_t s,
  input  logic [6:0]  rc0,
  input  logic [6:0]  rc1,
  output wage_state_t n
);
  logic [6:0] wgp1, wgp0, sb3, sb2, sb1, sb0, fb;

  wage_wgp u_wgp1 (.x(s[36]), .y(wgp1));
  wage_wgp u_wgp0 (.x(s[18]), .y(wgp0));
  wage_sb  u_sb3  (.x(s[34]), .y(sb3));
  wage_sb  u_sb2  (.x(s[27]), .y(sb2));
  wage_sb  u_sb1  (.x(s[15]), .y(sb1));
  wage_sb  u_sb0  (.x(s[8]),  .y(sb0));

  always_comb begin
    fb = s[31] ^ s[30] ^ s[26] ^ s[24] ^ s[19] ^ s[13] ^ s[12] ^ s[8] ^ s[6]
       ^ mul_omega(s[0]);
    for (int i = 0; i < 36; i++) n[i] = s[i+1];
    n[36] = fb ^ wgp1 ^ rc1;
    n[29] = s[30] ^ sb3;
    n[23] = s[24] ^ sb2;
    n[18] = s[19] ^ wgp0 ^ rc0;
    n[10] = s[11] ^ sb1;
    n[4]  = s[5]  ^ sb0;
  end
endmodule
