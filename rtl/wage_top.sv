// wage_top: the WAGE core - controller, round-constant LFSR and the
// 37-stage wage_lfsr.
//
// Same single-port interface as ace_top: reset, i_mode (bit 0: 0 encrypt,
// 1 decrypt), i_dom_sep, i_padding, i_data/i_valid, o_ready,
// o_data/o_valid. A block is accepted when o_ready and i_valid are both 1
// and its output appears in the same cycle. One block costs ceil(112/P)
// cycles: 112 for the serial core (0.57 bit per cycle), 56, 38, 28 and 14
// for P = 2, 3, 4, 8. See wage_fsm and wage_lfsr for the load and tag
// sequences.
module wage_top
  import wage_pkg::*;
#(
  parameter int unsigned P = 1     // rounds per clock: 1, 2, 3, 4, 6, 8
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
  wage_ctrl_t        ctrl;
  logic [P-1:0]      round_en;
  logic              lfsr_c_en, lfsr_c_reset;
  logic [P-1:0][6:0] rc0, rc1;
  wage_state_t       state;
  logic [6:0]        pcount;

  wage_fsm #(.P(P)) u_fsm (
    .clk, .reset, .i_mode, .i_dom_sep, .i_padding, .i_valid,
    .o_ready, .o_valid, .ctrl, .round_en, .lfsr_c_en, .lfsr_c_reset, .pcount
  );

  wage_lfsr_c #(.P(P)) u_lfsr_c (
    .clk, .lfsr_c_reset, .lfsr_c_en, .rc0, .rc1
  );

  wage_lfsr #(.P(P)) u_lfsr (
    .clk, .ctrl, .round_en, .rc0, .rc1, .i_data, .i_dom_sep, .o_data, .state
  );
endmodule
