// tb_workloads: runs the two evaluated configurations end to end at their
// full sequence lengths.
//   * Speech recognition: the decoder at its default parameters (beam width
//     8, lambda = 1.5, d1 = 0.1011110111, d2 = 0.1111110010, sentences up to
//     1800 labels) decodes one sequence of 1800 frames, the longest input of
//     that task. The frames spell 600 labels of dictionary words separated by
//     '_' (each label two frames, then a blank frame), so the kept Sentence
//     grows to 600 labels and every time step of the longest input is used.
//   * Scene text recognition: a second decoder with that task's settings
//     (lambda = 1/lambda = 1, d1 = 0.1010111111, d2 = 0.1111111111) and
//     sentences of at most 25 labels decodes one word from 25 frames, the
//     input length of that task.
// Both decoders share the dictionary load port and the y_in bus; only the
// selected one sees y_valid. Each result is compared with the spelled
// text, and the cycle count of each sequence is checked against
// frames * 412 cycles plus the output (28 input beats, 57 softmax cycles,
// at most 323 beam-search cycles per frame, handshakes).
// The network outputs are synthetic: the spelled label gets 10.0, all
// others 0.
module tb_workloads;
  import ctc_pkg::*;
  import tb_dict_pkg::*;

  localparam int ASR_T = 1800;
  localparam int STR_T = 25;

  logic clk = 0, rst_n = 0;
  logic signed [7:0] y_in;
  logic y_valid, y_last, sel_str;
  logic y_ready_asr, y_ready_str;
  logic lm_wr_en;
  lm_addr_t lm_wr_addr;
  lm_data_t lm_wr_data;
  logic res_valid_asr, res_last_asr, res_empty_asr;
  logic res_valid_str, res_last_str, res_empty_str;
  label_t res_label_asr, res_label_str;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ctc_decoder dut_asr (
    .clk, .rst_n, .y_in, .y_valid(y_valid && !sel_str), .y_last, .y_ready(y_ready_asr),
    .lm_wr_en, .lm_wr_addr, .lm_wr_data,
    .res_valid(res_valid_asr), .res_label(res_label_asr),
    .res_last(res_last_asr), .res_empty(res_empty_asr));

  ctc_decoder #(
    .T_MAX(STR_T), .LAMBDA(4'b1000), .INV_LAMBDA(4'b1000),
    .D1(11'b01010111111), .D2(11'b01111111111)
  ) dut_str (
    .clk, .rst_n, .y_in, .y_valid(y_valid && sel_str), .y_last, .y_ready(y_ready_str),
    .lm_wr_en, .lm_wr_addr, .lm_wr_data,
    .res_valid(res_valid_str), .res_label(res_label_str),
    .res_last(res_last_str), .res_empty(res_empty_str));

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lab(byte ch);
    return (ch == "_") ? 27 : int'(ch) - 96;
  endfunction

  // One frame of 28 beats: label `dom` gets 10.0, the rest 0.
  task automatic send_frame(int dom, bit last);
    for (int i = 0; i <= NUM_LABELS; i++) begin
      @(negedge clk);
      y_valid = 1;
      y_in    = (i == dom) ? 8'sd40 : 8'sd0;
      y_last  = last && (i == NUM_LABELS);
      @(posedge clk);
      while (!(sel_str ? y_ready_str : y_ready_asr)) @(posedge clk);
    end
    @(negedge clk);
    y_valid = 0; y_last = 0;
  endtask

  // `lead` blank frames, then every label for two frames and a blank frame.
  task automatic decode(bit str, string text, int lead, int frames_expected);
    string got;
    int nfr, t0, t1;
    sel_str = str;
    t0 = $time / 10;
    nfr = 0;
    for (int n = 0; n < lead; n++) begin send_frame(0, 0); nfr++; end
    for (int c = 0; c < text.len(); c++) begin
      send_frame(lab(text[c]), 0);
      send_frame(lab(text[c]), 0);
      send_frame(0, c == text.len() - 1);
      nfr += 3;
    end
    checks++;
    if (nfr != frames_expected) begin
      failures++; $display("FAIL %0d frames sent, %0d intended", nfr, frames_expected);
    end
    got = "";
    while (!(str ? res_valid_str : res_valid_asr)) @(negedge clk);
    forever begin
      label_t l;
      l = str ? res_label_str : res_label_asr;
      if (!(str ? res_empty_str : res_empty_asr))
        got = {got, (l == LABEL_SPACE) ? "_" : string'(byte'(96 + int'(l)))};
      if (str ? res_last_str : res_last_asr) break;
      @(negedge clk);
    end
    t1 = $time / 10;
    checks++;
    if (got != text) begin
      failures++;
      $display("FAIL %s: decoded %0d labels, expected %0d", str ? "STR" : "ASR", got.len(), text.len());
      $display("  got      '%s'", got);
      $display("  expected '%s'", text);
    end else
      $display("ok %s: %0d frames -> %0d labels in %0d cycles", str ? "STR" : "ASR",
               nfr, got.len(), t1 - t0);
    checks++;
    if (t1 - t0 > nfr * 412 + got.len() + 10) begin
      failures++; $display("FAIL too slow: %0d cycles for %0d frames", t1 - t0, nfr);
    end
    @(negedge clk);
  endtask

  string cycle [] = '{"fate", "fat", "abate", "consequence", "abandon", "acrid",
                      "consensus", "abase"};

  initial begin
    string text;
    int n;
    y_in = 0; y_valid = 0; y_last = 0; sel_str = 0;
    lm_wr_en = 0; lm_wr_addr = 0; lm_wr_data = 0;
    use_fig5_words();
    build();
    foreach (image[a]) begin
      @(negedge clk);
      lm_wr_en = 1; lm_wr_addr = lm_addr_t'(a); lm_wr_data = image[a];
    end
    @(negedge clk);
    lm_wr_en = 0;
    rst_n = 1;

    // Speech task: 600 labels of words and separators, 3 frames each.
    text = "";
    n = 0;
    while (text.len() + cycle[n % cycle.size()].len() + 1 <= ASR_T / 3) begin
      text = {text, cycle[n % cycle.size()], "_"};
      n++;
    end
    // fill up to exactly 600 labels with the start of a dictionary word
    if (text.len() < ASR_T / 3) begin
      string pad;
      pad  = "consequence";
      text = {text, pad.substr(0, ASR_T / 3 - text.len() - 1)};
    end
    decode(0, text, 0, ASR_T);

    // Text task: 4 leading blank frames and "abandon", 25 frames.
    decode(1, "abandon", 4, STR_T);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
