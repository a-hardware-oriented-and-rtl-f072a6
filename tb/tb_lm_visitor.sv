// tb_lm_visitor: builds the compressed dictionary of a small word list
// (the eight words of the trie example plus a few more that exercise word
// ends inside words), loads it into a reduced lm_memory, and starts the
// visitor from every node and from the root. For each label k = 1..27 the
// answer Pr(k|y) and the pointer T_S are compared with what the word list
// itself says: a letter is allowed when some word starts with prefix+letter
// (T_S = that node's address); '_' is allowed when the prefix is a word
// (T_S = 0, the root). Also checks that exactly 27 answers come, one per
// cycle, the first two cycles after start.
module tb_lm_visitor;
  import ctc_pkg::*;
  import tb_dict_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0;
  logic start, busy, mem_en, out_valid, out_pr, out_last;
  lm_addr_t dp, mem_addr, out_ts;
  lm_data_t mem_data;
  label_t out_k;
  logic wr_en;
  lm_addr_t wr_addr;
  lm_data_t wr_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  lm_visitor dut (.clk, .rst_n, .start, .dp, .busy, .mem_en, .mem_addr, .mem_data,
                  .out_valid, .out_k, .out_pr, .out_ts, .out_last);
  lm_memory #(.DEPTH(DEPTH)) u_mem (.clk, .rd_en(mem_en), .rd_addr(mem_addr), .rd_data(mem_data),
                                    .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    use_fig5_words();
    words.push_back("a");
    words.push_back("ab");
    words.push_back("cons");
    words.push_back("zz");
    build();
    start = 0; dp = 0; wr_en = 0; wr_addr = 0; wr_data = 0;
    foreach (image[a]) begin
      @(negedge clk);
      wr_en = 1; wr_addr = lm_addr_t'(a); wr_data = image[a];
    end
    @(negedge clk); wr_en = 0;
    rst_n = 1;
    for (int a = 0; a < image.size(); a++) begin
      string pref;
      int cyc;
      pref = node_pref[a];
      @(negedge clk);
      start = 1; dp = lm_addr_t'(a);
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2) begin failures++; $display("FAIL first answer after %0d cycles", cyc); end
      for (int k = 1; k <= 27; k++) begin
        bit exp_pr; int exp_ts;
        if (k < 27) begin
          string ext;
          ext = {pref, string'(byte'(96 + k))};
          exp_pr = has_prefix(ext);
          exp_ts = exp_pr ? node_of(ext) : int'(LM_INV);
        end else begin
          exp_pr = (a != 0) && is_word(pref);
          exp_ts = exp_pr ? 0 : int'(LM_INV);
        end
        checks++;
        if (!out_valid || int'(out_k) != k || out_pr != exp_pr || int'(out_ts) != exp_ts ||
            out_last != (k == 27)) begin
          failures++;
          $display("FAIL node %0d '%s' k=%0d: valid=%0b k=%0d pr=%0b ts=%0d, expected pr=%0b ts=%0d",
                   a, pref, k, out_valid, out_k, out_pr, out_ts, exp_pr, exp_ts);
        end
        @(negedge clk);
      end
      checks++;
      if (out_valid) begin failures++; $display("FAIL more than 27 answers"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
