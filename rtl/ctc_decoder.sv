// ctc_decoder: hardware CTC decoder with a compressed-dictionary language model.
//
// Takes, frame by frame, the K+1 = 28 raw outputs y_i of a CTC-trained network
// (blank first, then 'a'..'z' and '_'), turns them into label probabilities
// with the low-complexity softmax, and runs the memory-efficient beam search
// of width W over them. Whenever the beam search extends a prefix it asks the
// LM visitor, which walks the compressed binary trie held in the dictionary
// memory and answers, label by label, whether the extended prefix can still
// become a dictionary word, together with the new trie pointer. After the
// last frame of a sequence the most probable sentence comes out one label
// per cycle. This is the decoder of Fig. 8 of the paper: softmax ->
// probabilities -> beam search <-> LM visitor <-> dictionary memory, with a
// 19-bit address, 22-bit data memory port and 1-bit Pr(k|y) / 19-bit T_S
// between beam search and visitor.
// Interface:
//   y_in/y_valid/y_ready : network outputs, 8-bit two's complement with 2
//                          fractional bits, 28 beats per frame;
//                          y_last marks the last beat of the last frame.
//   lm_wr_*              : loads the dictionary (one 22-bit word per cycle)
//                          while no sequence is being decoded.
//   res_*                : decoded labels (1..26 letters, 27 '_').
// The softmax accepts the next frame only after the beam search has released
// the current one, so the two stages alternate. The network itself is not
// part of this design. The wiring follows the paper; the handshakes and the
// load port are this design's choices.
module ctc_decoder
  import ctc_pkg::*;
#(
  parameter int unsigned W         = 8,
  parameter int unsigned T_MAX     = 1800,
  parameter int unsigned LM_DEPTH  = 425984,
  parameter logic [3:0]  LAMBDA     = 4'b1100,
  parameter logic [3:0]  INV_LAMBDA = 4'b0101,
  parameter logic [10:0] D1         = 11'b01011110111,
  parameter logic [10:0] D2         = 11'b01111110010
) (
  input  logic              clk,
  input  logic              rst_n,
  // network outputs
  input  logic signed [7:0] y_in,
  input  logic              y_valid,
  input  logic              y_last,
  output logic              y_ready,
  // dictionary load port
  input  logic              lm_wr_en,
  input  lm_addr_t          lm_wr_addr,
  input  lm_data_t          lm_wr_data,
  // decoded sentence
  output logic              res_valid,
  output label_t            res_label,
  output logic              res_last,
  output logic              res_empty
);

  localparam int unsigned N = NUM_LABELS + 1;

  // softmax -> beam search
  prob_t [N-1:0] p;
  logic          p_valid, p_ack;
  logic          seq_last_q;

  // beam search <-> LM visitor
  logic     lm_start, lm_busy, lm_valid, lm_pr, lm_last;
  lm_addr_t lm_dp, lm_ts;
  label_t   lm_k;

  // LM visitor <-> memory
  logic     mem_en;
  lm_addr_t mem_addr;
  lm_data_t mem_data;

  softmax #(
    .N(N), .LAMBDA(LAMBDA), .INV_LAMBDA(INV_LAMBDA), .D1(D1), .D2(D2)
  ) u_softmax (
    .clk, .rst_n,
    .y_in, .in_valid(y_valid), .in_ready(y_ready),
    .p, .out_valid(p_valid), .out_ack(p_ack)
  );

  // The "last frame" flag travels with the frame held in the softmax.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             seq_last_q <= 1'b0;
    else if (y_valid && y_ready && y_last)  seq_last_q <= 1'b1;
    else if (p_ack)                         seq_last_q <= 1'b0;
  end

  beam_search #(.W(W), .K(NUM_LABELS), .T_MAX(T_MAX)) u_beam (
    .clk, .rst_n,
    .frame_valid(p_valid), .frame_p(p), .frame_last(seq_last_q), .frame_ack(p_ack),
    .lm_start, .lm_dp, .lm_busy, .lm_valid, .lm_k, .lm_pr, .lm_ts, .lm_last,
    .res_valid, .res_label, .res_last, .res_empty
  );

  lm_visitor u_visitor (
    .clk, .rst_n,
    .start(lm_start), .dp(lm_dp), .busy(lm_busy),
    .mem_en, .mem_addr, .mem_data,
    .out_valid(lm_valid), .out_k(lm_k), .out_pr(lm_pr), .out_ts(lm_ts), .out_last(lm_last)
  );

  lm_memory #(.DEPTH(LM_DEPTH)) u_lm (
    .clk,
    .rd_en(mem_en), .rd_addr(mem_addr), .rd_data(mem_data),
    .wr_en(lm_wr_en), .wr_addr(lm_wr_addr), .wr_data(lm_wr_data)
  );

endmodule
