// tb_lod: checks the leading-one detector against a bit-by-bit search.
// Walks every single-bit input, then random inputs, and the zero input.
module tb_lod;
  localparam int WIDTH = 30;
  logic [WIDTH-1:0]         in;
  logic [$clog2(WIDTH)-1:0] pos;
  logic                     found;
  int checks = 0, failures = 0;

  lod #(.WIDTH(WIDTH)) dut (.in, .pos, .found);

  task automatic check_one(logic [WIDTH-1:0] v);
    int exp_pos;
    exp_pos = -1;
    for (int b = WIDTH - 1; b >= 0; b--) if (v[b] && exp_pos < 0) exp_pos = b;
    in = v;
    #1;
    checks++;
    if (exp_pos < 0) begin
      if (found !== 1'b0) begin failures++; $display("FAIL zero input: found=%0b", found); end
    end else if (!found || int'(pos) != exp_pos) begin
      failures++;
      $display("FAIL in=%h pos=%0d expected %0d", v, pos, exp_pos);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one('0);
    for (int b = 0; b < WIDTH; b++) check_one(WIDTH'(1) << b);
    for (int n = 0; n < 500; n++) check_one(WIDTH'($urandom) >> ($urandom % WIDTH));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
