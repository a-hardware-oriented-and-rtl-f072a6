// lm_visitor: dictionary look-up for one beam entry (Algorithm 7 of the paper).
//
// Given the dictionary pointer DP(i) of a prefix y (the trie node of its last
// character, or the root 0 after a word end), the visitor emits, one label
// per cycle for k = 1..27, whether y+k is allowed by the dictionary
// (Pr(k|y), 1 bit) and the new pointer T_S (19 bits, LM_INV when not allowed).
// It reads the node at DP; unless the node's "left child is '_'" bit is set
// it reads the first child at DP+1 and then walks the sibling chain through
// the relative right-child addresses. Children are stored in label order, so
// one pass over k = 1..26 visits each sibling once and at most one memory
// read is issued per label. Label 27 ('_') is allowed unless the sibling
// chain ended with "no right child"; its pointer is the root, 0.
// Timing: `start` with `dp` (accepted when `busy` is low); the first
// output appears two cycles later, then one output per cycle for 27 cycles
// (`out_valid`, `out_k`, `out_pr`, `out_ts`); `out_last` marks k = 27.
// The memory interface expects a synchronous read with one cycle latency.
// The walk is the paper's; the cycle schedule is this design's.
module lm_visitor
  import ctc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  lm_addr_t dp,
  output logic     busy,
  // to the dictionary memory
  output logic     mem_en,
  output lm_addr_t mem_addr,
  input  lm_data_t mem_data,
  // to the beam search
  output logic     out_valid,
  output label_t   out_k,
  output logic     out_pr,
  output lm_addr_t out_ts,
  output logic     out_last
);

  typedef enum logic [1:0] {S_IDLE, S_FIRST, S_SCAN} state_t;
  state_t state;

  lm_addr_t   addr;
  logic [1:0] flag;
  label_t     k;
  lm_node_t   node;

  assign node = lm_node_t'(mem_data);
  assign busy = (state != S_IDLE);

  // Decision for the current label while scanning.
  logic match;
  assign match = (state == S_SCAN) && (k != LABEL_SPACE) && (flag == 2'd0) && (node.ch == k);

  always_comb begin
    mem_en   = 1'b0;
    mem_addr = addr;
    out_valid = (state == S_SCAN);
    out_k     = k;
    out_last  = (state == S_SCAN) && (k == LABEL_SPACE);
    out_pr    = 1'b0;
    out_ts    = LM_INV;
    unique case (state)
      S_IDLE: begin
        mem_en   = start;
        mem_addr = dp;
      end
      S_FIRST: begin
        mem_en   = !node.left_space;
        mem_addr = addr + 1'b1;
      end
      S_SCAN: begin
        if (k == LABEL_SPACE) begin
          out_pr = (flag != 2'd1);
          out_ts = (flag != 2'd1) ? '0 : LM_INV;
        end else if (match) begin
          out_pr = 1'b1;
          out_ts = addr;
          if (node.right_rel != RIGHT_NONE && node.right_rel != RIGHT_SPACE) begin
            mem_en   = 1'b1;
            mem_addr = addr + LM_ADDR_W'(node.right_rel);
          end
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      addr  <= '0;
      flag  <= '0;
      k     <= 5'd1;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          addr  <= dp;
          state <= S_FIRST;
        end
        S_FIRST: begin
          k <= 5'd1;
          if (!node.left_space) begin
            addr <= addr + 1'b1;
            flag <= 2'd0;
          end else begin
            flag <= 2'd2;
          end
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (match) begin
            if (node.right_rel == RIGHT_NONE)       flag <= 2'd1;
            else if (node.right_rel == RIGHT_SPACE) flag <= 2'd2;
            else                                    addr <= mem_addr;
          end
          if (k == LABEL_SPACE) state <= S_IDLE;
          else                  k <= k + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
