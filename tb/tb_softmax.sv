// tb_softmax: drives random frames of 28 logits (8-bit, 2 fractional bits)
// through the serial softmax and compares every output with a real-number
// model of the same steps: y_max, first EXP (d1), the sum F, the LOG unit,
// second EXP (d2). Also checks that the largest input gives the largest
// output, that the outputs add up to roughly 1, and the latency: out_valid
// rises 2N+1 cycles after the last input is accepted.
module tb_softmax;
  import ctc_pkg::*;
  localparam int N = 28;
  localparam logic [10:0] D1 = 11'b01011110111;
  localparam logic [10:0] D2 = 11'b01111110010;

  logic clk = 0, rst_n = 0;
  logic signed [7:0] y_in;
  logic in_valid, in_ready, out_valid, out_ack;
  prob_t [N-1:0] p;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  softmax #(.N(N)) dut (.clk, .rst_n, .y_in, .in_valid, .in_ready, .p, .out_valid, .out_ack);

  function automatic longint exp_model(real x, real d, int of, int ow);
    real z, u, v, r;
    z = x * 1.5;
    u = $floor(z);
    v = z - u;
    r = $floor((v + d) * (2.0 ** (u + of)));
    if (r >= 2.0 ** ow) return (longint'(1) << ow) - 1;
    return longint'(r);
  endfunction

  function automatic longint log_model(longint fi);
    real fr, kap, l2;
    int om;
    fr = real'(fi) / 65536.0;
    om = -16;
    while (2.0 ** (om + 1) <= fr) om++;
    kap = $floor((fr / (2.0 ** om) - 1.0) * 65536.0);
    l2  = real'(om) * 65536.0 + kap;
    return longint'($floor(l2 * 5.0 / 8.0));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ys [N];
    in_valid = 0; out_ack = 0; y_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 200; fr++) begin
      int ymax, imax, lat;
      longint e1 [N];
      longint fsum, lnf, pexp;
      real psum;
      // frame: random, sometimes one clear peak, sometimes flat
      for (int i = 0; i < N; i++) begin
        if (fr % 3 == 0)      ys[i] = int'($urandom % 256) - 128;
        else if (fr % 3 == 1) ys[i] = int'($urandom % 16) - 8;
        else                  ys[i] = int'($urandom % 40) - 60;
      end
      if (fr % 3 == 2) ys[$urandom % N] = int'($urandom % 60) + 20;
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1; y_in = 8'(ys[i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
      lat = 0;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2 * N + 1) begin
        failures++; $display("FAIL latency %0d, expected %0d", lat, 2 * N + 1);
      end
      // reference
      ymax = ys[0]; imax = 0;
      for (int i = 1; i < N; i++) if (ys[i] > ymax) begin ymax = ys[i]; imax = i; end
      fsum = 0;
      for (int i = 0; i < N; i++) begin
        e1[i] = exp_model(real'(ys[i] - ymax) / 4.0, real'(D1) / 1024.0, 16, 18);
        fsum += e1[i];
      end
      lnf = log_model(fsum);
      psum = 0.0;
      for (int i = 0; i < N; i++) begin
        pexp = exp_model((real'(ys[i] - ymax) * 16384.0 - real'(lnf)) / 65536.0,
                         real'(D2) / 1024.0, 30, 30);
        checks++;
        if (longint'(p[i]) != pexp) begin
          failures++;
          $display("FAIL frame %0d p[%0d]=%0d expected %0d", fr, i, p[i], pexp);
        end
        psum += real'(p[i]) / (2.0 ** 30);
      end
      checks++;
      for (int i = 0; i < N; i++)
        if (p[i] > p[imax]) begin failures++; $display("FAIL frame %0d: argmax moved", fr); break; end
      checks++;
      if (psum < 0.5 || psum > 1.6) begin
        failures++; $display("FAIL frame %0d: sum of p = %f", fr, psum);
      end
      @(negedge clk); out_ack = 1;
      @(negedge clk); out_ack = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
