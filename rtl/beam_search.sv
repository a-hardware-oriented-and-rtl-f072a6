// beam_search: memory-efficient CTC prefix beam search (Algorithms 3, 5 and 6
// of the paper, "CTC beam search decoding with all improvements").
//
// Storage (Fig. 4 of the paper), all of depth W:
//   B-hat : the current beam. Per entry the three probabilities Pr^-, Pr^+,
//           Pr (q = 30 fractions), SL (the 19-bit dictionary pointer DP) and
//           the Sentence (up to T_MAX labels plus its length).
//   B     : the next beam, probabilities and SL only (no Sentence).
//   B1,B2,B3 : for each B-hat entry, the index of its prefix in B-hat, its
//           last label, and the extension probability Pr(B2, B-hat(B1), t).
//   A1,A2 : for each B entry, the B-hat entry it came from and the label it
//           appended (0 when it kept the sentence unchanged).
//   d,c   : one bit each per entry, used while B is copied back into B-hat.
// For each frame (the K+1 softmax outputs of one time step, blank at index 0)
// the controller runs these phases, one step per cycle:
//   PREFIX (W*W cycles)   : compares every pair of B-hat sentences to fill B1/B2.
//   EXT    (29 per entry) : for each valid B-hat entry the LM visitor streams
//                           Pr(k|y) and T_S for k = 1..27; the extension
//                           probability Temp = Pr(k|y)Pr(k,t|X)Pr^(-)(y,t-1)
//                           is stored in B3 where B1/B2 ask for it and replaces
//                           the smallest entry of B when larger (sorting block).
//   STAY   (W cycles)     : each entry keeping its sentence gets Temp^-, Temp^+
//                           (including B3); it merges into the B entry holding
//                           the same sentence (B1=A1, B2=A2) or competes for a
//                           slot of B like an extension.
//   UPDATE (2W+1 cycles)  : Algorithm 3. Each B entry goes back to the slot of
//                           its source (d marks claimed slots, c placed B
//                           entries); the rest go to the first free slot found
//                           by the leading-one detector, copying the source's
//                           Sentence. Appending a label writes one position.
//   ADJUST (1 cycle)      : Algorithm 5. If the largest Pr of B-hat has its
//                           leading 1 below index(P_l), P_l = 2^-(log2(W)+1),
//                           every probability is shifted left by the gap.
// After the frame flagged `frame_last` the most probable entry of B-hat is
// streamed out, one label per cycle (res_valid/res_label/res_last; an empty
// result is a single beat with res_empty), and the beam is reset to the empty
// sentence with Pr^- = 1 - 2^-30.
// Frame timing: frame_ack is high W*W + 28*(valid B-hat entries) + 4W + 3
// cycles after the first cycle in which frame_valid is seen.
// Points where this design departs from the letter of the paper:
//  * Algorithm 3 line 58 copies "B-hat(i).Sentence"; the worked example of
//    Table 2 needs B-hat(A1(i)).Sentence, which is what is copied here, with
//    the source's length before this update; the freed slot is then marked
//    in d.
//  * Algorithm 6 line 62 sets A2 = k for an entry that kept its sentence;
//    Algorithm 3 defines A2 = 0 for that case, which is followed.
//  * B-hat and B entries carry a valid bit so that empty slots neither match
//    as prefixes nor are copied back; Temp sums saturate at 1 - 2^-30.
module beam_search
  import ctc_pkg::*;
#(
  parameter int unsigned W     = 8,
  parameter int unsigned K     = NUM_LABELS,
  parameter int unsigned T_MAX = 1800
) (
  input  logic            clk,
  input  logic            rst_n,
  // one frame of softmax outputs, held until frame_ack
  input  logic            frame_valid,
  input  prob_t [K:0]     frame_p,
  input  logic            frame_last,
  output logic            frame_ack,
  // LM visitor
  output logic            lm_start,
  output lm_addr_t        lm_dp,
  input  logic            lm_busy,
  input  logic            lm_valid,
  input  label_t          lm_k,
  input  logic            lm_pr,
  input  lm_addr_t        lm_ts,
  input  logic            lm_last,
  // decoded sentence
  output logic            res_valid,
  output label_t          res_label,
  output logic            res_last,
  output logic            res_empty
);

  localparam int unsigned IW     = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned LW     = $clog2(T_MAX + 1);
  localparam int unsigned PL_IDX = PROB_W - ($clog2(W) + 1);
  localparam int unsigned PPW    = $clog2(PROB_W);

  typedef logic [IW-1:0] idx_t;
  typedef logic [LW-1:0] len_t;

  // ---------------------------------------------------------------- storage
  beam_prob_t bh_prob  [W];
  lm_addr_t   bh_sl    [W];
  logic       bh_valid [W];
  len_t       bh_len   [W];
  label_t     bh_sent  [W][T_MAX];

  beam_prob_t b_prob   [W];
  lm_addr_t   b_sl     [W];
  logic       b_valid  [W];
  idx_t       a1       [W];
  label_t     a2       [W];

  idx_t       b1       [W];
  logic       b1v      [W];
  label_t     b2       [W];
  prob_t      b3       [W];

  logic [W-1:0] d;
  logic [W-1:0] c;
  len_t       len_old  [W];

  // ---------------------------------------------------------------- control
  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_PREFIX, S_EXT_ISSUE, S_EXT_RUN, S_STAY,
    S_UPD_INIT, S_UPD_FIX, S_UPD_FILL, S_ADJUST, S_ACK, S_OUT_FIND, S_OUT
  } state_t;
  state_t state;

  idx_t i_q, j_q;
  idx_t best_q;
  len_t pos_q;

  // ------------------------------------------------- sorting block (shared)
  logic [W-1:0][PROB_W-1:0] sb_values;
  logic [W-1:0]             sb_valid;
  logic                     sb_max;
  idx_t                     sb_idx;
  prob_t                    sb_value;
  logic                     sb_any;
  always_comb begin
    sb_max = (state == S_ADJUST) || (state == S_OUT_FIND);
    for (int n = 0; n < W; n++) begin
      sb_values[n] = sb_max ? bh_prob[n].p_total : b_prob[n].p_total;
      sb_valid[n]  = (state == S_ADJUST) ? d[n] : sb_max ? bh_valid[n] : b_valid[n];
    end
  end
  sort_block #(.N(W), .WIDTH(PROB_W), .SIGNED_CMP(1'b0)) u_sort (
    .values(sb_values), .valid(sb_valid), .find_max(sb_max),
    .idx(sb_idx), .value(sb_value), .any_valid(sb_any)
  );

  // ------------------------------------------------------- LOD (shared)
  logic [PROB_W-1:0] lod_in;
  logic [PPW-1:0]    lod_pos;
  logic              lod_found;
  always_comb begin
    lod_in = '0;
    if (state == S_ADJUST) lod_in = sb_value;
    else for (int n = 0; n < W; n++) lod_in[PROB_W-1-n] = ~d[n];
  end
  lod #(.WIDTH(PROB_W)) u_lod (.in(lod_in), .pos(lod_pos), .found(lod_found));
  idx_t free_slot;
  assign free_slot = IW'(PROB_W - 1 - 32'(lod_pos));

  // ------------------------------------------------ PREFIX comparator
  logic   pre_hit;
  label_t pre_label;
  always_comb begin
    logic eq;
    eq        = bh_valid[i_q] && bh_valid[j_q] && (i_q != j_q) &&
                (32'(bh_len[i_q]) == 32'(bh_len[j_q]) + 1);
    pre_label = '0;
    for (int p = 0; p < T_MAX; p++) begin
      if (p < 32'(bh_len[j_q]) && bh_sent[i_q][p] != bh_sent[j_q][p]) eq = 1'b0;
      if (p == 32'(bh_len[j_q])) pre_label = bh_sent[i_q][p];
    end
    pre_hit = eq;
  end

  // ------------------------------------------------ EXT arithmetic
  label_t last_lab_i;
  logic   has_last_i;
  assign has_last_i = (bh_len[i_q] != '0);
  assign last_lab_i = has_last_i ? bh_sent[i_q][bh_len[i_q] - 1'b1] : '0;

  prob_t ext_temp;
  always_comb begin
    prob_t base;
    base     = (has_last_i && lm_k == last_lab_i) ? bh_prob[i_q].p_blank : bh_prob[i_q].p_total;
    ext_temp = lm_pr ? prob_mul(frame_p[lm_k], base) : '0;
  end

  // ------------------------------------------------ STAY arithmetic
  prob_t t_minus, t_plus, t_all;
  logic  stay_hit;
  idx_t  stay_j;
  always_comb begin
    prob_t pe;
    pe      = has_last_i ? frame_p[last_lab_i] : '0;
    t_minus = prob_mul(bh_prob[i_q].p_total, frame_p[0]);
    t_plus  = prob_add(prob_mul(bh_prob[i_q].p_nblank, pe), b1v[i_q] ? b3[i_q] : '0);
    t_all   = prob_add(t_minus, t_plus);
    stay_hit = 1'b0;
    stay_j   = '0;
    for (int n = 0; n < W; n++) begin
      if (!stay_hit && b_valid[n] && b1v[i_q] && a2[n] != '0 &&
          a1[n] == b1[i_q] && a2[n] == b2[i_q]) begin
        stay_hit = 1'b1;
        stay_j   = idx_t'(n);
      end
    end
  end

  // ------------------------------------------------ outputs
  assign frame_ack = (state == S_ACK);
  assign lm_start  = (state == S_EXT_ISSUE) && bh_valid[i_q] && !lm_busy;
  assign lm_dp     = bh_sl[i_q];
  assign res_valid = (state == S_OUT);
  assign res_empty = (state == S_OUT) && (bh_len[best_q] == '0);
  assign res_last  = (state == S_OUT) && ((bh_len[best_q] == '0) || (pos_q == bh_len[best_q] - 1'b1));
  assign res_label = (bh_len[best_q] == '0) ? '0 : bh_sent[best_q][pos_q];

  // ------------------------------------------------ ADJUST shift amount
  logic [PPW-1:0] adj_sh;
  always_comb begin
    adj_sh = '0;
    if (lod_found && 32'(lod_pos) < PL_IDX) adj_sh = PPW'(PL_IDX - 32'(lod_pos));
  end

  // ------------------------------------------------ Sentence storage
  // Appending writes one label; a copy (third loop of Algorithm 3) moves the
  // source Sentence and the appended label into the free slot in one cycle.
  logic   upd_app, upd_copy;
  label_t copy_buf [T_MAX];
  always_comb begin
    upd_app  = (state == S_UPD_FIX)  && b_valid[i_q] && !d[a1[i_q]] && (a2[i_q] != '0);
    upd_copy = (state == S_UPD_FILL) && b_valid[i_q] && !c[i_q];
    copy_buf = bh_sent[a1[i_q]];
    if (a2[i_q] != '0 && 32'(len_old[a1[i_q]]) < T_MAX) copy_buf[len_old[a1[i_q]]] = a2[i_q];
  end

  always_ff @(posedge clk) begin
    if (upd_app) begin
      assert (32'(len_old[a1[i_q]]) < T_MAX)
        else $error("beam_search: sentence longer than T_MAX");
      bh_sent[a1[i_q]][len_old[a1[i_q]]] <= a2[i_q];
    end
    if (upd_copy) begin
      assert (a2[i_q] == '0 || 32'(len_old[a1[i_q]]) < T_MAX)
        else $error("beam_search: sentence longer than T_MAX");
      bh_sent[free_slot] <= copy_buf;
    end
  end

  logic last_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      i_q       <= '0;
      j_q       <= '0;
      best_q    <= '0;
      pos_q     <= '0;
      last_seen <= 1'b0;
      d         <= '0;
      c         <= '0;
      for (int n = 0; n < W; n++) begin
        bh_prob[n]  <= '0;
        bh_sl[n]    <= '0;
        bh_valid[n] <= 1'b0;
        bh_len[n]   <= '0;
        b_prob[n]   <= '0;
        b_sl[n]     <= '0;
        b_valid[n]  <= 1'b0;
        a1[n]       <= '0;
        a2[n]       <= '0;
        b1[n]       <= '0;
        b1v[n]      <= 1'b0;
        b2[n]       <= '0;
        b3[n]       <= '0;
        len_old[n]  <= '0;
      end
    end else begin
      unique case (state)
        // Beam = { empty sentence }, Pr^- = 1 (Algorithm 6 lines 1-2).
        S_INIT: begin
          for (int n = 0; n < W; n++) begin
            bh_prob[n]  <= '0;
            bh_sl[n]    <= '0;
            bh_valid[n] <= (n == 0);
            bh_len[n]   <= '0;
          end
          bh_prob[0].p_blank <= '1;
          bh_prob[0].p_total <= '1;
          state <= S_IDLE;
        end

        S_IDLE: if (frame_valid) begin
          for (int n = 0; n < W; n++) begin
            b_prob[n]  <= '0;
            b_valid[n] <= 1'b0;
            b1v[n]     <= 1'b0;
            b3[n]      <= '0;
          end
          last_seen <= frame_last;
          i_q   <= '0;
          j_q   <= '0;
          state <= S_PREFIX;
        end

        // Algorithm 6 lines 4-7.
        S_PREFIX: begin
          if (pre_hit) begin
            b1[i_q]  <= j_q;
            b1v[i_q] <= 1'b1;
            b2[i_q]  <= pre_label;
          end
          if (j_q == idx_t'(W - 1)) begin
            j_q <= '0;
            if (i_q == idx_t'(W - 1)) begin
              i_q   <= '0;
              state <= S_EXT_ISSUE;
            end else begin
              i_q <= i_q + 1'b1;
            end
          end else begin
            j_q <= j_q + 1'b1;
          end
        end

        // Algorithm 6 lines 8-26, one entry of B-hat at a time.
        S_EXT_ISSUE: begin
          if (!bh_valid[i_q]) begin
            if (i_q == idx_t'(W - 1)) begin
              i_q   <= '0;
              state <= S_STAY;
            end else begin
              i_q <= i_q + 1'b1;
            end
          end else if (!lm_busy) begin
            state <= S_EXT_RUN;
          end
        end

        S_EXT_RUN: if (lm_valid) begin
          for (int n = 0; n < W; n++)
            if (b1v[n] && b1[n] == i_q && b2[n] == lm_k) b3[n] <= ext_temp;
          if (ext_temp > sb_value) begin
            b_prob[sb_idx]  <= '{p_blank: '0, p_nblank: ext_temp, p_total: ext_temp};
            b_sl[sb_idx]    <= lm_ts;
            b_valid[sb_idx] <= 1'b1;
            a1[sb_idx]      <= i_q;
            a2[sb_idx]      <= lm_k;
          end
          if (lm_last) begin
            if (i_q == idx_t'(W - 1)) begin
              i_q   <= '0;
              state <= S_STAY;
            end else begin
              i_q   <= i_q + 1'b1;
              state <= S_EXT_ISSUE;
            end
          end
        end

        // Algorithm 6 lines 27-47.
        S_STAY: begin
          if (bh_valid[i_q]) begin
            if (stay_hit) begin
              b_prob[stay_j] <= '{p_blank: t_minus, p_nblank: t_plus, p_total: t_all};
              b_sl[stay_j]   <= bh_sl[i_q];
            end else if (t_all > sb_value) begin
              b_prob[sb_idx]  <= '{p_blank: t_minus, p_nblank: t_plus, p_total: t_all};
              b_sl[sb_idx]    <= bh_sl[i_q];
              b_valid[sb_idx] <= 1'b1;
              a1[sb_idx]      <= i_q;
              a2[sb_idx]      <= '0;
            end
          end
          if (i_q == idx_t'(W - 1)) begin
            i_q   <= '0;
            state <= S_UPD_INIT;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end

        // Algorithm 3, first loop.
        S_UPD_INIT: begin
          d <= '0;
          c <= '0;
          for (int n = 0; n < W; n++) len_old[n] <= bh_len[n];
          state <= S_UPD_FIX;
        end

        // Algorithm 3, second loop: B(i) returns to the slot of its source.
        S_UPD_FIX: begin
          if (b_valid[i_q] && !d[a1[i_q]]) begin
            bh_prob[a1[i_q]] <= b_prob[i_q];
            bh_sl[a1[i_q]]   <= b_sl[i_q];
            if (a2[i_q] != '0) bh_len[a1[i_q]] <= len_old[a1[i_q]] + 1'b1;
            d[a1[i_q]] <= 1'b1;
            c[i_q]     <= 1'b1;
          end
          if (i_q == idx_t'(W - 1)) begin
            i_q   <= '0;
            state <= S_UPD_FILL;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end

        // Algorithm 3, third loop: the rest go to the first free slot.
        S_UPD_FILL: begin
          if (b_valid[i_q] && !c[i_q]) begin
            bh_len[free_slot]   <= len_old[a1[i_q]] + len_t'(a2[i_q] != '0);
            bh_prob[free_slot]  <= b_prob[i_q];
            bh_sl[free_slot]    <= b_sl[i_q];
            d[free_slot]        <= 1'b1;
          end
          if (i_q == idx_t'(W - 1)) begin
            i_q   <= '0;
            state <= S_ADJUST;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end

        // Algorithm 5. Slots not refilled become invalid.
        S_ADJUST: begin
          for (int n = 0; n < W; n++) begin
            bh_valid[n] <= d[n];
            if (!d[n]) begin
              bh_prob[n] <= '0;
            end else begin
              bh_prob[n].p_blank  <= bh_prob[n].p_blank  << adj_sh;
              bh_prob[n].p_nblank <= bh_prob[n].p_nblank << adj_sh;
              bh_prob[n].p_total  <= bh_prob[n].p_total  << adj_sh;
            end
          end
          state <= S_ACK;
        end

        S_ACK: state <= last_seen ? S_OUT_FIND : S_IDLE;

        S_OUT_FIND: begin
          best_q <= sb_idx;
          pos_q  <= '0;
          state  <= S_OUT;
        end

        S_OUT: begin
          if (res_last) state <= S_INIT;
          else          pos_q <= pos_q + 1'b1;
        end

        default: state <= S_INIT;
      endcase
    end
  end

endmodule
