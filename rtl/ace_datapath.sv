// ace_datapath: the ACE state register and everything in front of it.
//
// Five 64-bit registers A..E hold the 320-bit state. In one clock cycle the
// datapath passes the state through, in this order, one purely
// combinational cloud:
//   1. i_data / o_data muxes: the rate {A[63:32], C[63:32]} is absorbed
//      (XOR with i_data), replaced by i_data (decryption) or left alone;
//      the 2-bit domain separator is XORed into E[1:0]; o_data is the
//      ciphertext/plaintext (rate ^ i_data), the rate, the low halves of A
//      and C (second tag word) or forced to zero.
//   2. P chained SB-64_1 rounds on A, C and E, each with its own round
//      constant bit (P = 1 is the serial design, P = 2, 4, 8 unrolled).
//   3. On the last cycle of a step: B ^= C ^ sc0, D ^= E ^ sc1,
//      E ^= A ^ sc2 (step constants padded with 56 ones) and the register
//      permutation (A,B,C,D,E) <- (D',C',A',E'',B').
//   4. Load muxes: a whole register is replaced by i_data (key and nonce
//      words) or the state is set to the hash IV.
// The result is registered at the clock edge. This follows Fig. 8 of the
// design description and its statement that input/output muxes, one round
// and the load muxes form one combinational circuit.
//
// Partial last blocks in decryption (pad = 1): the environment supplies
// the ciphertext bits followed by the 10* padding. The bits above the
// final 1 of i_data are replaced, that 1 and everything below are XORed,
// which gives rate = C || (rate_tail ^ 10*). This mask logic, the D <= 0
// on the first key word and the register-enable "hold" are this design's
// own choices; the paper replaces datapath register enables by clock
// gating, which a synthesis flow can infer from the enable.
module ace_datapath
  import ace_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  logic              clk,
  input  ace_ctrl_t         ctrl,
  input  logic [63:0]       i_data,
  input  logic [1:0]        i_dom_sep,
  input  logic [P-1:0][2:0] rc,
  input  logic [2:0][7:0]   sc,
  output logic [63:0]       o_data,
  output logic [4:0][63:0]  state     // {E,D,C,B,A}, for observation
);
  logic [63:0] a, b, c, d, e;
  logic [63:0] a_n, b_n, c_n, d_n, e_n;
  logic [63:0] rate, rate_in, low_mask;
  logic [63:0] ta, tc, te, bp, dp, epp;
  logic [63:0] a_in, c_in, e_in;
  logic [P:0][63:0] a_ch, c_ch, e_ch;   // SB-64_1 chains

  assign a_ch[0] = a_in;
  assign c_ch[0] = c_in;
  assign e_ch[0] = e_in;
  for (genvar k = 0; k < P; k++) begin : g_round
    ace_sb64 u_sb_a (.x(a_ch[k]), .rc(rc[k][0]), .y(a_ch[k+1]));
    ace_sb64 u_sb_c (.x(c_ch[k]), .rc(rc[k][1]), .y(c_ch[k+1]));
    ace_sb64 u_sb_e (.x(e_ch[k]), .rc(rc[k][2]), .y(e_ch[k+1]));
  end

  // Input side of the round: rate muxes and domain separator.
  always_comb begin
    rate = {a[63:32], c[63:32]};
    low_mask = ctrl.pad ? (i_data ^ (i_data - 64'd1)) : 64'd0;
    unique case (ctrl.in_op)
      IN_ABSORB:  rate_in = rate ^ i_data;
      IN_REPLACE: rate_in = (i_data & ~low_mask) | ((rate ^ i_data) & low_mask);
      default:    rate_in = rate;
    endcase
    a_in = {rate_in[63:32], a[31:0]};
    c_in = {rate_in[31:0],  c[31:0]};
    e_in = e ^ {62'd0, ctrl.dom_en ? i_dom_sep : 2'b00};
  end

  assign state = {e, d, c, b, a};

  always_comb begin
    // o_data muxes
    unique case (ctrl.out_sel)
      OUT_XOR:  o_data = rate ^ i_data;
      OUT_RATE: o_data = rate;
      OUT_LOW:  o_data = {a[31:0], c[31:0]};
      default:  o_data = '0;
    endcase

    // rounds (the chained ace_sb64 instances)
    ta = a_in; tc = c_in; te = e_in;
    bp = b; dp = d; epp = te;
    if (ctrl.perm_en) begin
      ta = a_ch[P]; tc = c_ch[P]; te = e_ch[P];
      // step additions and constants
      bp  = b  ^ tc ^ {STEP_ONES, sc[0]};
      dp  = d  ^ te ^ {STEP_ONES, sc[1]};
      epp = te ^ ta ^ {STEP_ONES, sc[2]};
    end

    // round/step muxes
    if (ctrl.perm_en && ctrl.step) begin
      a_n = dp; b_n = tc; c_n = ta; d_n = epp; e_n = bp;
    end else begin
      a_n = ta; b_n = b;  c_n = tc; d_n = d;   e_n = te;
    end

    // load muxes
    unique case (ctrl.ld)
      LD_A:  begin a_n = i_data; d_n = '0; end
      LD_C:  c_n = i_data;
      LD_B:  b_n = i_data;
      LD_E:  e_n = i_data;
      LD_IV: begin a_n = '0; b_n = HASH_IV_B; c_n = '0; d_n = '0; e_n = '0; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!ctrl.hold) begin
      a <= a_n; b <= b_n; c <= c_n; d <= d_n; e <= e_n;
    end
  end
endmodule
