// wage_fsm: controller of the WAGE core.
//
// Same valid-bit protocol and phase decoding as the ACE controller (see
// ace_fsm), with WAGE's numbers:
//   LOAD  o_ready = 1; nine i_valid words shift the key/nonce material into
//         the five loading regions (OP_LOAD), then the first permutation
//         runs on its own.
//   IDLE  o_ready = 1, pcount = 0 waits for i_valid. The accepted cycle is
//         slot 0 of the permutation: rate absorb/replace, domain separator,
//         o_data/o_valid for message blocks.
//   RUN   the permutation is 112 slots (input slot + 111 rounds); with P
//         slots per clock it takes ceil(112/P) cycles, counted by pcount.
//         round_en[k] marks which of the P slots of the cycle are rounds.
//   TAG   nine cycles of OP_TAG with o_valid = 1, then back to LOAD.
// i_mode[0] selects encryption (0) or decryption (1); i_mode[1] is unused
// by WAGE. Domain separators 00/01/10 mark key, associated-data and
// message blocks. The two phase flags (message seen, first finalisation
// block taken), the nine-word load and the automatic tag output are this
// design's choices. reset is synchronous.
module wage_fsm
  import wage_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  logic         clk,
  input  logic         reset,
  input  logic [1:0]   i_mode,
  input  logic [1:0]   i_dom_sep,
  input  logic         i_padding,
  input  logic         i_valid,
  output logic         o_ready,
  output logic         o_valid,
  output wage_ctrl_t   ctrl,
  output logic [P-1:0] round_en,
  output logic         lfsr_c_en,
  output logic         lfsr_c_reset,
  output logic [6:0]   pcount
);
  localparam int unsigned NCYC = (PERM_SLOTS + P - 1) / P;

  typedef enum logic [1:0] {ST_LOAD, ST_IDLE, ST_RUN, ST_TAG} st_e;

  st_e        st, st_n;
  logic [6:0] pc_n;
  logic [3:0] wcnt, wcnt_n;     // load / tag word counter
  logic       data_seen, data_seen_n, fin1, fin1_n, tag_pend, tag_pend_n;

  always_comb begin
    for (int k = 0; k < P; k++) begin
      automatic int unsigned g = int'(pcount) * P + k;
      round_en[k] = (g >= 1) && (g <= PERM_ROUNDS);
    end
  end

  always_comb begin
    ctrl        = '{op: OP_HOLD, in_op: IN_NONE, pad: 1'b0, dom_en: 1'b0, out_en: 1'b0};
    o_ready     = 1'b0;
    o_valid     = 1'b0;
    st_n        = st;
    pc_n        = pcount;
    wcnt_n      = wcnt;
    data_seen_n = data_seen;
    fin1_n      = fin1;
    tag_pend_n  = tag_pend;

    unique case (st)
      ST_LOAD: begin
        o_ready = 1'b1;
        if (i_valid) begin
          ctrl.op = OP_LOAD;
          wcnt_n  = wcnt + 4'd1;
          if (int'(wcnt) == LOAD_WORDS - 1) begin
            wcnt_n = '0;
            st_n   = ST_RUN;
          end
        end
      end

      ST_IDLE: begin
        o_ready = 1'b1;
        if (i_valid) begin
          ctrl.op     = OP_RUN;
          ctrl.dom_en = 1'b1;
          ctrl.in_op  = IN_ABSORB;
          if (i_dom_sep == DS_MSG) begin
            ctrl.out_en = 1'b1;
            o_valid     = 1'b1;
            data_seen_n = 1'b1;
            if (i_mode[0]) begin
              ctrl.in_op = IN_REPLACE;
              ctrl.pad   = i_padding;
            end
          end else if (i_dom_sep == DS_KEY && data_seen) begin
            fin1_n = 1'b1;
            if (fin1) tag_pend_n = 1'b1;
          end
          pc_n = 7'd1;
          st_n = ST_RUN;
        end
      end

      ST_RUN: begin
        ctrl.op = OP_RUN;
        pc_n    = pcount + 7'd1;
        if (int'(pcount) == NCYC - 1) begin
          pc_n = '0;
          st_n = tag_pend ? ST_TAG : ST_IDLE;
        end
      end

      default: begin  // ST_TAG
        ctrl.op = OP_TAG;
        o_valid = 1'b1;
        wcnt_n  = wcnt + 4'd1;
        if (int'(wcnt) == TAG_WORDS - 1) begin
          wcnt_n      = '0;
          st_n        = ST_LOAD;
          data_seen_n = 1'b0;
          fin1_n      = 1'b0;
          tag_pend_n  = 1'b0;
        end
      end
    endcase

    lfsr_c_en    = (ctrl.op == OP_RUN);
    // Reseed when idle and on the last cycle of a permutation.
    lfsr_c_reset = reset | (ctrl.op != OP_RUN) | (st == ST_RUN && int'(pcount) == NCYC - 1);
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      st        <= ST_LOAD;
      pcount    <= '0;
      wcnt      <= '0;
      data_seen <= 1'b0;
      fin1      <= 1'b0;
      tag_pend  <= 1'b0;
    end else begin
      st        <= st_n;
      pcount    <= pc_n;
      wcnt      <= wcnt_n;
      data_seen <= data_seen_n;
      fin1      <= fin1_n;
      tag_pend  <= tag_pend_n;
    end
  end

  a_pcount_range: assert property (@(posedge clk) disable iff (reset)
    int'(pcount) < NCYC);
  a_no_output_while_busy: assert property (@(posedge clk) disable iff (reset)
    (o_valid && st != ST_TAG) |-> (i_valid && o_ready));
endmodule
