// tb_beam_search: runs the beam search without a language model (every
// extension allowed, as when Pr(k|y) = 1) on random peaky frames and compares
// the decoded sentence with a real-number model of the original CTC prefix
// beam search (keep the W most probable prefixes, merge paths that collapse
// to the same prefix). Sequences whose best two prefixes are too close for
// 30-bit fixed point are not compared. Also checks the frame time,
// W*W + 28*(valid entries) + 4W + 3 cycles, and counts the mechanisms of the
// design: merges of an extension into an entry that stays (B1/B2 = A1/A2),
// replacement of the smallest B entry when B is full, sentence copies in the
// third loop of the update, and rescaling by the adjust step. Each must happen.
// A small behavioural LM answers 27 labels, allowed, two cycles after start.
module tb_beam_search;
  import ctc_pkg::*;
  localparam int W = 8;
  localparam int K = 27;
  localparam int TM = 64;

  logic clk = 0, rst_n = 0;
  logic frame_valid, frame_last, frame_ack;
  prob_t [K:0] frame_p;
  logic lm_start, lm_busy, lm_valid, lm_pr, lm_last;
  lm_addr_t lm_dp, lm_ts;
  label_t lm_k;
  logic res_valid, res_last, res_empty;
  label_t res_label;
  int checks = 0, failures = 0;
  int n_merge = 0, n_evict = 0, n_copy = 0, n_shift = 0;

  always #5 clk = ~clk;

  beam_search #(.W(W), .K(K), .T_MAX(TM)) dut (
    .clk, .rst_n, .frame_valid, .frame_p, .frame_last, .frame_ack,
    .lm_start, .lm_dp, .lm_busy, .lm_valid, .lm_k, .lm_pr, .lm_ts, .lm_last,
    .res_valid, .res_label, .res_last, .res_empty);

  // Behavioural LM: allows everything.
  int lm_cnt = 0;
  assign lm_busy  = (lm_cnt != 0);
  assign lm_valid = (lm_cnt >= 2);
  assign lm_k     = label_t'(lm_cnt - 1);
  assign lm_pr    = 1'b1;
  assign lm_ts    = '0;
  assign lm_last  = (lm_cnt == 28);
  always @(posedge clk) begin
    if (lm_start && lm_cnt == 0) lm_cnt <= 1;
    else if (lm_cnt == 28)       lm_cnt <= 0;
    else if (lm_cnt != 0)        lm_cnt <= lm_cnt + 1;
  end

  // Mechanism counters.
  always @(posedge clk) if (rst_n) begin
    if (dut.state == 4'd5 && dut.bh_valid[dut.i_q] && dut.stay_hit) n_merge++;
    if (dut.state == 4'd4 && lm_valid && dut.ext_temp > dut.sb_value && dut.b_valid[dut.sb_idx]) n_evict++;
    if (dut.upd_copy) n_copy++;
    if (dut.state == 4'd9 && dut.adj_sh != 0) n_shift++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string lab(int k);
    return (k == 27) ? "_" : string'(byte'(96 + k));
  endfunction

  // Reference state
  real pb [string];
  real pnb [string];

  initial begin
    int seqs_compared = 0;
    frame_valid = 0; frame_last = 0; frame_p = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 8; s++) begin
      int nfr;
      string best, second;
      real bestp, secp;
      string got;
      nfr = 12 + int'($urandom % 12);
      pb.delete(); pnb.delete();
      pb[""] = 1.0; pnb[""] = 0.0;
      for (int t = 0; t < nfr; t++) begin
        real pr [K+1];
        real tot;
        int dom, nv, cyc;
        real npb [string];
        real npnb [string];
        string keys [$];
        // frame
        npb.delete(); npnb.delete(); keys.delete();
        tot = 0.0;
        for (int k = 0; k <= K; k++) begin pr[k] = real'($urandom % 1000) / 1000.0 * 0.02; end
        dom = ($urandom % 3 == 0) ? 0 : (($urandom % 5 == 0) ? 27 : 1 + int'($urandom % 4));
        pr[dom] += (s % 2 == 0) ? 0.5 + real'($urandom % 400) / 1000.0 : 0.2 + real'($urandom % 300) / 1000.0;
        if (s % 2 == 1) pr[1 + int'($urandom % 4)] += 0.15;
        for (int k = 0; k <= K; k++) tot += pr[k];
        for (int k = 0; k <= K; k++) begin
          frame_p[k] = prob_t'(longint'($floor(pr[k] / tot * 0.999 * (2.0 ** 30))));
          pr[k] = real'(frame_p[k]) / (2.0 ** 30);
        end
        // reference step (prefix beam search over the current beam)
        foreach (pb[y]) begin
          real ptot;
          ptot = pb[y] + pnb[y];
          if (!npb.exists(y)) begin npb[y] = 0.0; npnb[y] = 0.0; end
          npb[y] += ptot * pr[0];
          if (y.len() > 0) npnb[y] += pnb[y] * pr[int'(y[y.len()-1]) == 95 ? 27 : int'(y[y.len()-1]) - 96];
          for (int k = 1; k <= K; k++) begin
            string yk;
            int le;
            yk = {y, lab(k)};
            le = (y.len() == 0) ? 0 : (y[y.len()-1] == "_" ? 27 : int'(y[y.len()-1]) - 96);
            if (!npb.exists(yk)) begin npb[yk] = 0.0; npnb[yk] = 0.0; end
            npnb[yk] += ((le == k) ? pb[y] : ptot) * pr[k];
          end
        end
        // keep the W best
        foreach (npb[y]) keys.push_back(y);
        keys.sort() with (-(npb[item] + npnb[item]));
        pb.delete(); pnb.delete();
        for (int n = 0; n < W && n < keys.size(); n++) begin
          pb[keys[n]] = npb[keys[n]]; pnb[keys[n]] = npnb[keys[n]];
        end
        // hardware
        @(negedge clk);
        while (dut.state != 4'd1) @(negedge clk);
        nv = 0;
        for (int n = 0; n < W; n++) nv += int'(dut.bh_valid[n]);
        frame_valid = 1; frame_last = (t == nfr - 1);
        cyc = 0;
        while (!frame_ack) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != W * W + 28 * nv + 4 * W + 3) begin
          failures++; $display("FAIL frame time %0d, expected %0d", cyc, W * W + 28 * nv + 4 * W + 3);
        end
        @(negedge clk);
        frame_valid = 0;
      end
      // reference answer
      bestp = -1.0; secp = -1.0; best = ""; second = "";
      foreach (pb[y]) begin
        real v;
        v = pb[y] + pnb[y];
        if (v > bestp) begin secp = bestp; second = best; bestp = v; best = y; end
        else if (v > secp) begin secp = v; second = y; end
      end
      // collect hardware answer
      got = "";
      while (!res_valid) @(negedge clk);
      forever begin
        if (!res_empty) got = {got, lab(int'(res_label))};
        if (res_last) break;
        @(negedge clk);
      end
      if (bestp > secp * 1.02) begin
        seqs_compared++;
        checks++;
        if (got != best) begin
          failures++;
          $display("FAIL sequence %0d: decoded '%s', expected '%s' (p %g vs %g)", s, got, best, bestp, secp);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (seqs_compared < 4) begin failures++; $display("FAIL only %0d sequences compared", seqs_compared); end
    $display("mechanisms: merge=%0d evict=%0d copy=%0d shift=%0d", n_merge, n_evict, n_copy, n_shift);
    checks += 4;
    if (n_merge == 0) begin failures++; $display("FAIL no merge"); end
    if (n_evict == 0) begin failures++; $display("FAIL no eviction"); end
    if (n_copy == 0)  begin failures++; $display("FAIL no sentence copy"); end
    if (n_shift == 0) begin failures++; $display("FAIL no rescaling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
