// lm_memory: storage for the compressed dictionary (the language model).
//
// DEPTH words of 22 bits, one per node of the binary trie stored in preorder
// (Fig. 7 of the paper): bits 21:17 character (1..26 = 'a'..'z', 27 = '_'),
// bit 16 set when the node's only child is the word end '_', bits 15:0 the
// relative address of the right sibling (0 = none, 65535 = the sibling is
// '_'). The root sits at address 0. The default depth covers addresses 0 to
// 425,983 of the figure (the 191,735-word dictionary).
// Read port: synchronous, `rd_en` with `rd_addr` in one cycle, `rd_data` valid
// from the next cycle and held until the next read. Write port: synchronous,
// used to load the dictionary before decoding.
// The paper fixes the word format, the address and data widths and the depth;
// the read timing and the separate load port are this design's choices.
module lm_memory
  import ctc_pkg::*;
#(
  parameter int unsigned DEPTH = 425984
) (
  input  logic     clk,
  input  logic     rd_en,
  input  lm_addr_t rd_addr,
  output lm_data_t rd_data,
  input  logic     wr_en,
  input  lm_addr_t wr_addr,
  input  lm_data_t wr_data
);

  lm_data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end

endmodule
