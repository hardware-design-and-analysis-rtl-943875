// wage_wgp: the 7-bit decimated Welch-Gong permutation WGP of WAGE.
//
// Combinational look-up: the 128-entry table is computed at elaboration
// time from the algebraic definition in wage_pkg (WG permutation of
// GF(2^7) with decimation 13), never stored as data. As in the paper the
// table is written as a constant array and left to synthesis to turn into
// a net of AND, OR, XOR and NOT gates. Two instances sit at stages S36 and
// S18 of each round; the unrolled versions replicate them.
module wage_wgp
  import wage_pkg::*;
(
  input  logic [6:0] x,
  output logic [6:0] y
);
  localparam wgp_table_t TBL = wgp_table();

  assign y = TBL[x];
endmodule
