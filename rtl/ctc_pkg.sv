// ctc_pkg: constants and helper types shared by the CTC decoder modules.
//
// Label encoding (follows the compressed dictionary format): labels 1..26 are
// the letters 'a'..'z', label 27 is the word separator '_'. Softmax output
// index 0 is the CTC blank; that placement is this design's own choice.
// Probabilities in the beam search are unsigned fractions with PROB_W = 30
// fractional bits (q = 30 in the paper), so 1.0 is not representable and the
// largest value is 1 - 2^-30.
package ctc_pkg;

  // Number of non-blank labels (26 letters + '_').
  localparam int unsigned NUM_LABELS = 27;
  // Width of a label code.
  localparam int unsigned LABEL_W    = 5;
  // Probability width: q = 30 fractional bits, no integer bit.
  localparam int unsigned PROB_W     = 30;
  // Dictionary memory: 19-bit node address, 22-bit node word.
  localparam int unsigned LM_ADDR_W  = 19;
  localparam int unsigned LM_DATA_W  = 22;
  // Invalid dictionary address returned with Pr(k|y) = 0 (Algorithm 7).
  localparam logic [LM_ADDR_W-1:0] LM_INV = '1;  // 2^19 - 1 = 524287
  // Relative sibling address codes (Fig. 7).
  localparam logic [15:0] RIGHT_NONE  = 16'd0;
  localparam logic [15:0] RIGHT_SPACE = 16'hFFFF;
  // Label code of the word separator '_'.
  localparam logic [LABEL_W-1:0] LABEL_SPACE = 5'd27;

  typedef logic [PROB_W-1:0]    prob_t;
  typedef logic [LABEL_W-1:0]   label_t;
  typedef logic [LM_ADDR_W-1:0] lm_addr_t;
  typedef logic [LM_DATA_W-1:0] lm_data_t;

  // One node word of the compressed dictionary (Fig. 7): bits 21:17 character,
  // bit 16 "left child is '_'", bits 15:0 relative address of the right child.
  typedef struct packed {
    logic [4:0]  ch;
    logic        left_space;
    logic [15:0] right_rel;
  } lm_node_t;

  // The three probabilities kept for each beam entry.
  typedef struct packed {
    prob_t p_blank;   // Pr^-(y,t)
    prob_t p_nblank;  // Pr^+(y,t)
    prob_t p_total;   // Pr(y,t)
  } beam_prob_t;

  // Truncated product of two q=30 fractions.
  function automatic prob_t prob_mul(input prob_t a, input prob_t b);
    logic [2*PROB_W-1:0] p;
    p = a * b;
    return p[2*PROB_W-1:PROB_W];
  endfunction

  // Saturating sum of two q=30 fractions.
  function automatic prob_t prob_add(input prob_t a, input prob_t b);
    logic [PROB_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[PROB_W] ? '1 : s[PROB_W-1:0];
  endfunction

endpackage
