// ace_fsm: controller of the ACE core.
//
// It implements the valid-bit protocol of the single input/output port and
// the permutation counter pcount. Phases:
//   LOAD  o_ready = 1. For AEAD (i_mode[1] = 0) four i_valid words are
//         loaded: key word 0 into A (D cleared), key word 1 into C, nonce
//         word 0 into B, nonce word 1 into E. For hashing (i_mode[1] = 1)
//         one i_valid pulse loads the fixed IV; its data are ignored. The
//         first permutation then runs on its own (RUN).
//   IDLE  o_ready = 1, pcount = 0 stalls until i_valid. The accepted cycle
//         absorbs/replaces the block, drives o_data/o_valid combinationally
//         (encryption, decryption, hash squeeze) and is also the first
//         round of the next permutation.
//   RUN   pcount counts 1 .. 128/P-1, o_ready = 0; on the wrap to 0 the
//         core returns to IDLE (or TAG after the second finalisation block).
//   TAG   two cycles with o_valid = 1: {A[63:32],C[63:32]} then
//         {A[31:0],C[31:0]}; then back to LOAD for the next message.
// The block operation is decoded from i_mode and i_dom_sep exactly as in
// the mode table: i_mode = 00/01 encrypt/decrypt, 10/11 hash absorb/
// squeeze; domain separator 00 key blocks, 01 associated data, 10 message
// or ciphertext. The core does not count blocks; it only remembers whether
// a message block has been seen and whether one finalisation block has
// already been taken, because initialisation and finalisation share the
// separator 00 and tag extraction must follow the second finalisation
// block. Those two flags, the key/nonce word order and the automatic tag
// output are this design's choices; the paper leaves them open. A hashing
// computation ends with reset.
//
// lfsr_c is held at its seed whenever no round is computed, advances on
// every round cycle and is reseeded on the last cycle of a permutation. reset is synchronous.
module ace_fsm
  import ace_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  logic       clk,
  input  logic       reset,
  input  logic [1:0] i_mode,
  input  logic [1:0] i_dom_sep,
  input  logic       i_padding,
  input  logic       i_valid,
  output logic       o_ready,
  output logic       o_valid,
  output ace_ctrl_t  ctrl,
  output logic       lfsr_c_en,
  output logic       lfsr_c_reset,
  output logic [$clog2(PERM_ROUNDS/P+1)-1:0] pcount
);
  localparam int unsigned NCYC = PERM_ROUNDS / P;      // cycles per permutation
  localparam int unsigned CPS  = ROUNDS_PER_STEP / P;  // cycles per step
  localparam int unsigned CW   = $clog2(NCYC + 1);

  typedef enum logic [2:0] {ST_LOAD, ST_IDLE, ST_RUN, ST_TAG0, ST_TAG1} st_e;

  st_e         st, st_n;
  logic [CW-1:0] pc_n;
  logic [1:0]  ld_cnt, ld_cnt_n;
  logic        data_seen, data_seen_n, fin1, fin1_n, tag_pend, tag_pend_n;

  function automatic logic last_in_step(input logic [CW-1:0] c);
    return (int'(c) % CPS) == CPS - 1;
  endfunction

  function automatic logic [CW-1:0] inc(input logic [CW-1:0] c);
    return (int'(c) == NCYC - 1) ? '0 : c + 1'b1;
  endfunction

  always_comb begin
    ctrl        = '{in_op: IN_NONE, pad: 1'b0, dom_en: 1'b0, out_sel: OUT_ZERO,
                    perm_en: 1'b0, step: 1'b0, ld: LD_NONE, hold: 1'b1};
    o_ready     = 1'b0;
    o_valid     = 1'b0;
    st_n        = st;
    pc_n        = pcount;
    ld_cnt_n    = ld_cnt;
    data_seen_n = data_seen;
    fin1_n      = fin1;
    tag_pend_n  = tag_pend;

    unique case (st)
      ST_LOAD: begin
        o_ready = 1'b1;
        if (i_valid) begin
          ctrl.hold = 1'b0;
          if (i_mode[1]) begin
            ctrl.ld = LD_IV;
            st_n    = ST_RUN;
          end else begin
            unique case (ld_cnt)
              2'd0: ctrl.ld = LD_A;
              2'd1: ctrl.ld = LD_C;
              2'd2: ctrl.ld = LD_B;
              default: ctrl.ld = LD_E;
            endcase
            ld_cnt_n = ld_cnt + 2'd1;
            if (ld_cnt == 2'd3) st_n = ST_RUN;
          end
        end
      end

      ST_IDLE: begin
        o_ready = 1'b1;
        if (i_valid) begin
          ctrl.hold    = 1'b0;
          ctrl.perm_en = 1'b1;
          ctrl.step    = last_in_step(pcount);
          if (i_mode[1]) begin
            if (i_mode[0]) begin             // hash squeeze
              ctrl.out_sel = OUT_RATE;
              o_valid      = 1'b1;
            end else begin                   // hash absorb
              ctrl.in_op   = IN_ABSORB;
            end
          end else begin
            ctrl.dom_en = 1'b1;
            ctrl.in_op  = IN_ABSORB;
            if (i_dom_sep == DS_MSG) begin
              ctrl.out_sel = OUT_XOR;
              o_valid      = 1'b1;
              data_seen_n  = 1'b1;
              if (i_mode[0]) begin
                ctrl.in_op = IN_REPLACE;
                ctrl.pad   = i_padding;
              end
            end else if (i_dom_sep == DS_KEY && data_seen) begin
              fin1_n = 1'b1;
              if (fin1) tag_pend_n = 1'b1;
            end
          end
          pc_n = inc(pcount);
          if (NCYC > 1) st_n = ST_RUN;
          else if (tag_pend_n) st_n = ST_TAG0;
        end
      end

      ST_RUN: begin
        ctrl.hold    = 1'b0;
        ctrl.perm_en = 1'b1;
        ctrl.step    = last_in_step(pcount);
        pc_n         = inc(pcount);
        if (int'(pcount) == NCYC - 1) st_n = tag_pend ? ST_TAG0 : ST_IDLE;
      end

      ST_TAG0: begin
        o_valid      = 1'b1;
        ctrl.out_sel = OUT_RATE;
        st_n         = ST_TAG1;
      end

      default: begin  // ST_TAG1
        o_valid      = 1'b1;
        ctrl.out_sel = OUT_LOW;
        st_n         = ST_LOAD;
        ld_cnt_n     = '0;
        data_seen_n  = 1'b0;
        fin1_n       = 1'b0;
        tag_pend_n   = 1'b0;
      end
    endcase

    lfsr_c_en    = ctrl.perm_en;
    // Reseed when idle and on the last cycle of a permutation, so that a
    // block accepted right after the wrap starts from the seed.
    lfsr_c_reset = reset | ~ctrl.perm_en | (ctrl.perm_en && int'(pcount) == NCYC - 1);
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      st        <= ST_LOAD;
      pcount    <= '0;
      ld_cnt    <= '0;
      data_seen <= 1'b0;
      fin1      <= 1'b0;
      tag_pend  <= 1'b0;
    end else begin
      st        <= st_n;
      pcount    <= pc_n;
      ld_cnt    <= ld_cnt_n;
      data_seen <= data_seen_n;
      fin1      <= fin1_n;
      tag_pend  <= tag_pend_n;
    end
  end

  // pcount only leaves 0 while a permutation runs, and wraps at 128/P.
  a_pcount_range: assert property (@(posedge clk) disable iff (reset)
    int'(pcount) < NCYC);
  a_idle_pcount: assert property (@(posedge clk) disable iff (reset)
    (st == ST_IDLE || st == ST_LOAD) |-> pcount == '0);
endmodule
