// ace_pkg: types and constants shared by the ACE modules.
//
// ACE keeps its 320-bit state in five 64-bit registers A..E. The rate (the
// 64 bits the environment reads and writes) is the upper half of A and the
// upper half of C: i_data[63:32] lines up with A[63:32] and i_data[31:0] with
// C[63:32]. The controller drives the datapath through one packed struct,
// ace_ctrl_t, whose fields are the select lines of the multiplexers of the
// datapath (input muxes, output muxes, round/step muxes, load muxes).
//
// The two 32-bit constants below are those of the ACE specification (SB-64
// round constant 0xfffffffe, step-constant padding 1^56); the paper itself only
// prints the 1-bit round constant and 8-bit step constant taps.
package ace_pkg;

  localparam int unsigned ROUNDS_PER_STEP = 8;
  localparam int unsigned STEPS           = 16;
  localparam int unsigned PERM_ROUNDS     = ROUNDS_PER_STEP * STEPS;  // 128

  // Constant XORed into the new left half by every SB-64 round, bit 0
  // replaced by the 1-bit round constant.
  localparam logic [31:0] SB_CONST   = 32'hFFFF_FFFE;
  // Upper 56 bits of each step constant word (lower 8 bits carry sc).
  localparam logic [55:0] STEP_ONES  = {56{1'b1}};

  // i_mode encodings (Table 2 of the design description).
  localparam logic [1:0] MODE_ENC     = 2'b00;
  localparam logic [1:0] MODE_DEC     = 2'b01;
  localparam logic [1:0] MODE_HASH_AB = 2'b10;
  localparam logic [1:0] MODE_HASH_SQ = 2'b11;

  // Domain separators.
  localparam logic [1:0] DS_KEY  = 2'b00;
  localparam logic [1:0] DS_AD   = 2'b01;
  localparam logic [1:0] DS_MSG  = 2'b10;

  // Hash initialisation vector: B[7], B[6], B[5] = 0x80, 0x40, 0x40.
  localparam logic [63:0] HASH_IV_B = 64'h8040_4000_0000_0000;

  typedef enum logic [1:0] {
    IN_NONE    = 2'd0,   // rate passes unchanged
    IN_ABSORB  = 2'd1,   // rate ^= i_data
    IN_REPLACE = 2'd2    // rate  = i_data (decryption)
  } ace_in_e;

  typedef enum logic [1:0] {
    OUT_ZERO  = 2'd0,    // o_data forced to 0
    OUT_XOR   = 2'd1,    // rate ^ i_data (ciphertext / plaintext)
    OUT_RATE  = 2'd2,    // {A[63:32], C[63:32]} (hash squeeze, first tag word)
    OUT_LOW   = 2'd3     // {A[31:0],  C[31:0]}  (second tag word)
  } ace_out_e;

  typedef enum logic [2:0] {
    LD_NONE = 3'd0,
    LD_A    = 3'd1,      // A <= i_data, D <= 0
    LD_C    = 3'd2,
    LD_B    = 3'd3,
    LD_E    = 3'd4,
    LD_IV   = 3'd5       // whole state <= hash IV
  } ace_ld_e;

  typedef struct packed {
    ace_in_e  in_op;     // rate input multiplexer
    logic     pad;       // last block is padded (partial replace)
    logic     dom_en;    // XOR i_dom_sep into E[1:0]
    ace_out_e out_sel;   // o_data multiplexer
    logic     perm_en;   // perform P rounds this cycle
    logic     step;      // this cycle ends a step (round/step muxes)
    ace_ld_e  ld;        // load multiplexers
    logic     hold;      // keep the state (register enable low)
  } ace_ctrl_t;

endpackage
