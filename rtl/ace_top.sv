// ace_top: the ACE core - controller, constant LFSR and datapath.
//
// One 64-bit input port and one 64-bit output port with a valid bit each,
// plus o_ready, as in the common interface of the two ciphers:
//   reset      synchronous reset of the controller
//   i_mode     00 encrypt, 01 decrypt, 10 hash absorb, 11 hash squeeze
//   i_dom_sep  domain separator of the block (00 key, 01 AD, 10 message)
//   i_padding  the current (last) message/ciphertext block is padded
//   i_data     input block, i_valid marks the single cycle it is present
//   o_ready    core is waiting for a block; o_data/o_valid output block
// A block is accepted in the cycle where o_ready and i_valid are both 1;
// ciphertext, plaintext or hash output appear in that same cycle. One
// permutation takes 128/P cycles, the first of which is the accepting
// cycle, so the serial core (P = 1) moves 64 bits per 128 cycles.
// See ace_fsm for the load / tag sequence.
module ace_top
  import ace_pkg::*;
#(
  parameter int unsigned P = 1     // rounds per clock: 1, 2, 4, 8
) (
  input  logic        clk,
  input  logic        reset,
  input  logic [1:0]  i_mode,
  input  logic [1:0]  i_dom_sep,
  input  logic        i_padding,
  input  logic [63:0] i_data,
  input  logic        i_valid,
  output logic        o_ready,
  output logic [63:0] o_data,
  output logic        o_valid
);
  ace_ctrl_t          ctrl;
  logic               lfsr_c_en, lfsr_c_reset;
  logic [P-1:0][2:0]  rc;
  logic [2:0][7:0]    sc;
  logic [4:0][63:0]   state;
  logic [$clog2(PERM_ROUNDS/P+1)-1:0] pcount;

  ace_fsm #(.P(P)) u_fsm (
    .clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_valid,
    .o_ready, .o_valid, .ctrl, .lfsr_c_en, .lfsr_c_reset, .pcount
  );

  ace_lfsr_c #(.P(P)) u_lfsr_c (
    .clk, .lfsr_c_reset, .lfsr_c_en, .rc, .sc
  );

  ace_datapath #(.P(P)) u_dp (
    .clk, .ctrl, .i_data, .i_dom_sep, .rc, .sc, .o_data, .state
  );
endmodule
