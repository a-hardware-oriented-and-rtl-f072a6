// tb_log_unit: checks the LOG unit against a real-number model:
// omega = floor(log2 F), kappa - 1 = F/2^omega - 1 truncated to 16 bits,
// ln F ~= floor(0.625 * (omega + kappa - 1) * 2^16). Inputs cover F from
// 2^-16 to 64 (16 fractional bits), including powers of two.
module tb_log_unit;
  logic [21:0]        f;
  logic signed [23:0] ln_f;
  int checks = 0, failures = 0;

  log_unit #(.FW(22), .FF(16), .LW(24), .INV_LAMBDA(4'b0101)) dut (.f, .ln_f);

  function automatic longint model(longint fi);
    real fr, kap, l2;
    int om;
    fr = real'(fi) / 65536.0;
    om = -16;
    while (2.0 ** (om + 1) <= fr) om++;
    kap = $floor((fr / (2.0 ** om) - 1.0) * 65536.0);
    l2  = real'(om) * 65536.0 + kap;
    return longint'($floor(l2 * 5.0 / 8.0));
  endfunction

  task automatic check_one(longint fi);
    longint e;
    f = 22'(fi);
    #1;
    e = model(fi);
    checks++;
    if (longint'(ln_f) != e) begin
      failures++;
      $display("FAIL F=%0d/65536 got %0d expected %0d", fi, ln_f, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 22; b++) check_one(longint'(1) << b);
    for (int n = 0; n < 3000; n++) check_one(longint'($urandom % (1 << 22)) | 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
