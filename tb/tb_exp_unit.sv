// tb_exp_unit: checks both EXP unit configurations of the softmax against a
// real-number model of the same approximation: z = lambda*x, u = floor(z),
// v = z - u, result = floor((v + d) * 2^u * 2^OF), saturated to the output
// width. The first configuration (d1, 2 fractional input bits) is swept over
// all 512 inputs; the second (d2, 16 fractional input bits, q = 30 output)
// gets random inputs between -70 and +1.
module tb_exp_unit;
  localparam logic [10:0] D1 = 11'b01011110111;
  localparam logic [10:0] D2 = 11'b01111110010;
  logic signed [8:0]  x1;
  logic [17:0]        y1;
  logic signed [24:0] x2;
  logic [29:0]        y2;
  int checks = 0, failures = 0;

  exp_unit #(.XW(9), .XF(2), .OW(18), .OF(16), .LAMBDA(4'b1100), .D(D1)) dut1 (.x(x1), .y(y1));
  exp_unit #(.XW(25), .XF(16), .OW(30), .OF(30), .LAMBDA(4'b1100), .D(D2)) dut2 (.x(x2), .y(y2));

  function automatic longint model(real x, real lambda, real d, int of, int ow);
    real z, u, v, r;
    z = x * lambda;
    u = $floor(z);
    v = z - u;
    r = $floor((v + d) * (2.0 ** (u + of)));
    if (r >= 2.0 ** ow) return (longint'(1) << ow) - 1;
    return longint'(r);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real d1, d2;
    d1 = real'(D1) / 1024.0;
    d2 = real'(D2) / 1024.0;
    for (int n = -256; n < 256; n++) begin
      longint e;
      x1 = 9'(n);
      #1;
      e = model(real'(n) / 4.0, 1.5, d1, 16, 18);
      checks++;
      if (longint'(y1) != e) begin
        failures++;
        $display("FAIL exp1 x=%0d/4 got %0d expected %0d", n, y1, e);
      end
    end
    for (int n = 0; n < 3000; n++) begin
      longint e; int xi;
      xi = -int'($urandom % (70 * 65536)) + int'($urandom % 65536);
      x2 = 25'(xi);
      #1;
      e = model(real'(xi) / 65536.0, 1.5, d2, 30, 30);
      checks++;
      if (longint'(y2) != e) begin
        failures++;
        $display("FAIL exp2 x=%0d/65536 got %0d expected %0d", xi, y2, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
