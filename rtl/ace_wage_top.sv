// ace_wage_top: the ACE core and the WAGE core side by side.
//
// The two ciphers share one interface definition and one I/O protocol but
// are independent circuits; this wrapper simply instantiates both, each
// with its own copy of the interface (ace_* and wage_* ports) and a common
// clock. Each core keeps its own unrolling parameter, defaulting to the
// serial designs (ACE 128 cycles per block, WAGE 112).
module ace_wage_top #(
  parameter int unsigned ACE_P  = 1,
  parameter int unsigned WAGE_P = 1
) (
  input  logic        clk,
  // ACE
  input  logic        ace_reset,
  input  logic [1:0]  ace_i_mode,
  input  logic [1:0]  ace_i_dom_sep,
  input  logic        ace_i_padding,
  input  logic [63:0] ace_i_data,
  input  logic        ace_i_valid,
  output logic        ace_o_ready,
  output logic [63:0] ace_o_data,
  output logic        ace_o_valid,
  // WAGE
  input  logic        wage_reset,
  input  logic [1:0]  wage_i_mode,
  input  logic [1:0]  wage_i_dom_sep,
  input  logic        wage_i_padding,
  input  logic [63:0] wage_i_data,
  input  logic        wage_i_valid,
  output logic        wage_o_ready,
  output logic [63:0] wage_o_data,
  output logic        wage_o_valid
);
  ace_top #(.P(ACE_P)) u_ace (
    .clk, .reset(ace_reset), .i_mode(ace_i_mode), .i_dom_sep(ace_i_dom_sep),
    .i_padding(ace_i_padding), .i_data(ace_i_data), .i_valid(ace_i_valid),
    .o_ready(ace_o_ready), .o_data(ace_o_data), .o_valid(ace_o_valid)
  );

  wage_top #(.P(WAGE_P)) u_wage (
    .clk, .reset(wage_reset), .i_mode(wage_i_mode), .i_dom_sep(wage_i_dom_sep),
    .i_padding(wage_i_padding), .i_data(wage_i_data), .i_valid(wage_i_valid),
    .o_ready(wage_o_ready), .o_data(wage_o_data), .o_valid(wage_o_valid)
  );
endmodule
