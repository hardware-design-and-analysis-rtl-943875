// wage_lfsr: the 37-stage WAGE state with the sponge-mode hardware.
//
// The 64-bit i_data is split into ten fragments D0..D9, D_k = i_data[7k+6:7k]
// for k = 0..8 and D9 = {6'b0, i_data[63]} (64 bits padded to 70). They
// meet the rate stages S8, S9, S15, S16, S18, S27, S28, S34, S35 and bit 0
// of S36, in that order; the same 64-bit packing gives the outputs O_k on
// o_data. Operations (ctrl.op):
//   OP_RUN   slot 0 is the input slot: the rate stages absorb (XOR) or are
//            replaced by D_k, the domain separator is XORed into S0[1:0],
//            all other stages hold (lfsr_en). Then P round slots follow,
//            each enabled by round_en[k], with its own constants. O_k =
//            S_k ^ D_k are driven from the state before the input slot.
//   OP_LOAD  the five loading regions S0..S8, S9..S16, S17..S18, S19..S27
//            and S28..S36 shift by one stage towards S0, fed directly by
//            D0, D3, D4, D5 and D9 at S8, S16, S18, S27, S36. SB and WGP are
//            off. Nine load words fill all 259 state bits.
//   OP_TAG   the whole state shifts by one stage towards S0 (SB, WGP and
//            feedback off, S36 holds); o_data carries O1 = S9, O3 = S16 and
//            O6 = S28 in their fragment positions (their D inputs are gated
//            off), everything else 0. Nine tag words are read.
// What follows the paper: the fragment-to-stage map, the regions and their
// inputs, in-place absorption with hold, SB off for load/tag, and the
// 112-slot schedule with the input treated as one extra round slot. This
// design's own choices: bit order inside i_data, the load fragment of S36
// (D9 carries only one bit, so loading S28..S36 uses i_data[63:57]), the
// tag regions and packing, and partial-block replacement in decryption
// (the bits above the last 1 of i_data are replaced, the rest XORed).
module wage_lfsr
  import wage_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  logic              clk,
  input  wage_ctrl_t        ctrl,
  input  logic [P-1:0]      round_en,
  input  logic [P-1:0][6:0] rc0,
  input  logic [P-1:0][6:0] rc1,
  input  logic [63:0]       i_data,
  input  logic [1:0]        i_dom_sep,
  output logic [63:0]       o_data,
  output wage_state_t       state
);
  wage_state_t s, s_in, s_ld, s_tag, s_n;
  wage_state_t [P:0] ch;      // round chain
  wage_state_t [P-1:0] rnd;   // round outputs
  logic [63:0] rate, rate_new, low_mask, o_run, o_tag;

  assign state = s;

  // Rate vector in i_data order.
  always_comb begin
    rate[63] = s[36][0];
    for (int k = 0; k < 9; k++) rate[7*k +: 7] = s[RATE_STAGE[k]];
  end

  // Input slot.
  always_comb begin
    low_mask = ctrl.pad ? (i_data ^ (i_data - 64'd1)) : 64'd0;
    unique case (ctrl.in_op)
      IN_ABSORB:  rate_new = rate ^ i_data;
      IN_REPLACE: rate_new = (i_data & ~low_mask) | ((rate ^ i_data) & low_mask);
      default:    rate_new = rate;
    endcase
    s_in = s;
    s_in[36][0] = rate_new[63];
    for (int k = 0; k < 9; k++) s_in[RATE_STAGE[k]] = rate_new[7*k +: 7];
    if (ctrl.dom_en) s_in[0][1:0] = s[0][1:0] ^ i_dom_sep;
    o_run = ctrl.out_en ? (rate ^ i_data) : 64'd0;
  end

  // Round slots.
  assign ch[0] = s_in;
  for (genvar k = 0; k < P; k++) begin : g_slot
    wage_round u_round (.s(ch[k]), .rc0(rc0[k]), .rc1(rc1[k]), .n(rnd[k]));
    assign ch[k+1] = round_en[k] ? rnd[k] : ch[k];
  end

  // Loading and tag extraction.
  always_comb begin
    for (int i = 0; i < 36; i++) s_ld[i] = s[i+1];
    s_ld[8]  = i_data[6:0];     // D0
    s_ld[16] = i_data[27:21];   // D3
    s_ld[18] = i_data[34:28];   // D4
    s_ld[27] = i_data[41:35];   // D5
    s_ld[36] = i_data[63:57];   // D9, widened for loading

    for (int i = 0; i < 36; i++) s_tag[i] = s[i+1];
    s_tag[36] = s[36];
    o_tag = '0;
    o_tag[13:7]  = s[9];        // O1
    o_tag[27:21] = s[16];       // O3
    o_tag[48:42] = s[28];       // O6
  end

  always_comb begin
    unique case (ctrl.op)
      OP_RUN:  begin s_n = ch[P]; o_data = o_run; end
      OP_LOAD: begin s_n = s_ld;  o_data = '0;    end
      OP_TAG:  begin s_n = s_tag; o_data = o_tag; end
      default: begin s_n = s;     o_data = '0;    end
    endcase
  end

  always_ff @(posedge clk) begin
    if (ctrl.op != OP_HOLD) s <= s_n;
  end
endmodule
