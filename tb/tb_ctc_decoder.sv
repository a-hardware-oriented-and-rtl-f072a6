// tb_ctc_decoder: end-to-end test of the whole decoder at its default size
// (beam width 8, sentences of up to 1800 labels, a 425,984-word dictionary
// memory). It loads the compressed dictionary of eight words (abandon, abase,
// abate, acrid, consensus, consequence, fat, fate, plus twelve three-letter
// words so that many labels can start a word), then feeds sequences of
// raw network outputs (8-bit, 2 fractional bits, blank first) and compares
// the decoded sentence with the expected one:
//   * clean spellings of "fate_fat" and "consequence" with repeated frames
//     and blanks between letters;
//   * "f?te" where the network favours 'z' over 'a' in one frame: the
//     dictionary forbids "fz", so "fate" must win;
//   * "abate" with two flat frames (every output equal), which drives the
//     probabilities down and makes the adjust step rescale them;
//   * "fate" after two frames in which the blank leads only slightly, where more candidates than the beam
//     holds compete, so the smallest entry of B is replaced;
//   * a sequence of blanks only, whose result is the empty sentence.
// Every decoded word must be a dictionary word (the last one at least a
// prefix). Counted mechanisms, each of which must occur: dictionary
// rejections of a likely label, returns to the trie root after '_', merges
// of an extension into an entry that stays, replacement of the smallest B
// entry, Sentence copies while B-hat is rebuilt, and rescaling.
// The frame rate is checked too: each sequence must finish within
// frames * (28 + 57 + 323 + 4) cycles plus the output.
module tb_ctc_decoder;
  import ctc_pkg::*;
  import tb_dict_pkg::*;

  logic clk = 0, rst_n = 0;
  logic signed [7:0] y_in;
  logic y_valid, y_last, y_ready;
  logic lm_wr_en;
  lm_addr_t lm_wr_addr;
  lm_data_t lm_wr_data;
  logic res_valid, res_last, res_empty;
  label_t res_label;
  int checks = 0, failures = 0;
  int n_reject = 0, n_root = 0, n_merge = 0, n_evict = 0, n_copy = 0, n_shift = 0;

  always #5 clk = ~clk;

  ctc_decoder dut (
    .clk, .rst_n, .y_in, .y_valid, .y_last, .y_ready,
    .lm_wr_en, .lm_wr_addr, .lm_wr_data,
    .res_valid, .res_label, .res_last, .res_empty);

  // Mechanism counters (beam search states: 4 = EXT_RUN, 5 = STAY, 9 = ADJUST).
  always @(posedge clk) if (rst_n) begin
    if (dut.u_beam.state == 4'd4 && dut.lm_valid) begin
      if (!dut.lm_pr && dut.p[dut.lm_k] > prob_t'(1 << 27)) n_reject++;
      if (dut.lm_pr && dut.lm_k == LABEL_SPACE && dut.lm_ts == '0 &&
          dut.u_beam.ext_temp > dut.u_beam.sb_value) n_root++;
      if (dut.u_beam.ext_temp > dut.u_beam.sb_value && dut.u_beam.b_valid[dut.u_beam.sb_idx]) n_evict++;
    end
    if (dut.u_beam.state == 4'd5 && dut.u_beam.bh_valid[dut.u_beam.i_q] && dut.u_beam.stay_hit) n_merge++;
    if (dut.u_beam.upd_copy) n_copy++;
    if (dut.u_beam.state == 4'd9 && dut.u_beam.adj_sh != 0) n_shift++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One frame: the dominant label gets `hi`, an optional second label `mid`,
  // everything else 0 (all values in units of 1/4).
  task automatic send_frame(int dom, int hi, int sec, int mid, bit last);
    for (int i = 0; i <= NUM_LABELS; i++) begin
      @(negedge clk);
      y_valid = 1;
      y_in    = (i == dom) ? 8'(hi) : (i == sec) ? 8'(mid) : 8'd0;
      y_last  = last && (i == NUM_LABELS);
      @(posedge clk);
      while (!y_ready) @(posedge clk);
    end
    @(negedge clk);
    y_valid = 0; y_last = 0;
  endtask

  function automatic int lab(byte ch);
    return (ch == "_") ? 27 : int'(ch) - 96;
  endfunction

  // Spell a string: each letter for two frames, then a blank frame.
  // The character '?' stands for the ambiguous frame: 'z' high, 'a' a bit lower.
  // '~' stands for a flat frame, '^' for a frame where the blank leads only
  // slightly and every letter is still plausible, '.' for a blank frame.
  string plan;
  task automatic run_plan(string s, ref int nfr);
    nfr = 0;
    for (int c = 0; c < s.len(); c++) begin
      bit last_char;
      last_char = (c == s.len() - 1);
      if (s[c] == "?") begin
        send_frame(26, 44, 1, 40, 0); send_frame(26, 44, 1, 40, 0); nfr += 2;
      end else if (s[c] == "~") begin
        send_frame(-1, 0, -1, 0, 0); nfr += 1;
      end else if (s[c] == "^") begin
        send_frame(0, 12, -1, 0, 0); nfr += 1;
      end else if (s[c] == ".") begin
        send_frame(0, 40, -1, 0, 0); nfr += 1;
      end else begin
        send_frame(lab(s[c]), 40, -1, 0, 0); send_frame(lab(s[c]), 40, -1, 0, 0); nfr += 2;
      end
      send_frame(0, 40, -1, 0, last_char);
      nfr += 1;
    end
  endtask

  task automatic decode(string s, string expected);
    string got;
    int nfr, t0, t1, w0;
    bit empty_seen;
    t0 = $time / 10;
    run_plan(s, nfr);
    got = ""; empty_seen = 0;
    while (!res_valid) @(negedge clk);
    forever begin
      if (res_empty) empty_seen = 1;
      else got = {got, (res_label == LABEL_SPACE) ? "_" : string'(byte'(96 + int'(res_label)))};
      if (res_last) break;
      @(negedge clk);
    end
    t1 = $time / 10;
    checks++;
    if (got != expected || (expected == "") != empty_seen) begin
      failures++;
      $display("FAIL input '%s': decoded '%s', expected '%s'", s, got, expected);
    end else $display("ok: '%s' -> '%s' (%0d frames, %0d cycles)", s, got, nfr, t1 - t0);
    checks++;
    if (t1 - t0 > nfr * (28 + 57 + 323 + 4) + got.len() + 10) begin
      failures++; $display("FAIL too slow: %0d cycles for %0d frames", t1 - t0, nfr);
    end
    // every complete word is in the dictionary, the last one a prefix of one
    w0 = 0;
    for (int c = 0; c <= got.len(); c++) begin
      if (c == got.len() || got[c] == "_") begin
        string wd;
        wd = (c > w0) ? got.substr(w0, c - 1) : "";
        checks++;
        if (c == got.len() ? (wd != "" && !has_prefix(wd)) : !is_word(wd)) begin
          failures++; $display("FAIL '%s' is not in the dictionary", wd);
        end
        w0 = c + 1;
      end
    end
    @(negedge clk);
  endtask

  string extra [] = '{"bat", "cab", "dab", "egg", "gab", "hat", "ink", "jab",
                      "kit", "lab", "mat", "nab"};

  initial begin
    y_in = 0; y_valid = 0; y_last = 0;
    lm_wr_en = 0; lm_wr_addr = 0; lm_wr_data = 0;
    use_fig5_words();
    // more three-letter words so that many labels are allowed at a word start
    foreach (extra[n]) words.push_back(extra[n]);
    build();
    foreach (image[a]) begin
      @(negedge clk);
      lm_wr_en = 1; lm_wr_addr = lm_addr_t'(a); lm_wr_data = image[a];
    end
    @(negedge clk);
    lm_wr_en = 0;
    rst_n = 1;
    decode("fate_fat", "fate_fat");
    decode("f?te", "fate");
    decode("^^fate", "fate");
    decode("ab~~ate", "abate");
    decode("consequence", "consequence");
    decode("....", "");
    $display("mechanisms: reject=%0d root=%0d merge=%0d evict=%0d copy=%0d shift=%0d",
             n_reject, n_root, n_merge, n_evict, n_copy, n_shift);
    checks += 6;
    if (n_reject == 0) begin failures++; $display("FAIL no dictionary rejection"); end
    if (n_root == 0)   begin failures++; $display("FAIL no return to the root"); end
    if (n_merge == 0)  begin failures++; $display("FAIL no merge"); end
    if (n_evict == 0)  begin failures++; $display("FAIL no replacement"); end
    if (n_copy == 0)   begin failures++; $display("FAIL no sentence copy"); end
    if (n_shift == 0)  begin failures++; $display("FAIL no rescaling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
