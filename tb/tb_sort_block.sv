// tb_sort_block: checks the min/max sorting block against a linear search
// written in the testbench, with random values, random valid masks, ties,
// and signed comparison (as used for y_max in the softmax).
module tb_sort_block;
  localparam int N = 8;
  localparam int WIDTH = 30;
  logic [N-1:0][WIDTH-1:0] values;
  logic [N-1:0]            valid;
  logic                    find_max;
  logic [$clog2(N)-1:0]    idx, sidx;
  logic [WIDTH-1:0]        value;
  logic [7:0]              svalue;
  logic                    any_valid, sany;
  logic [N-1:0][7:0]       svalues;
  int checks = 0, failures = 0;

  sort_block #(.N(N), .WIDTH(WIDTH)) dut (.values, .valid, .find_max, .idx, .value, .any_valid);
  sort_block #(.N(N), .WIDTH(8), .SIGNED_CMP(1'b1)) dut_s (
    .values(svalues), .valid('1), .find_max(1'b1), .idx(sidx), .value(svalue), .any_valid(sany));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      longint best; int bi; bit seen;
      for (int i = 0; i < N; i++) values[i] = (n % 3 == 0) ? WIDTH'($urandom % 4) : WIDTH'($urandom);
      valid    = (n % 4 == 0) ? '1 : N'($urandom);
      find_max = n[0];
      #1;
      bi = 0; seen = 0; best = 0;
      if (find_max) begin
        for (int i = 0; i < N; i++)
          if (valid[i] && (!seen || longint'(values[i]) > best)) begin best = values[i]; bi = i; seen = 1; end
      end else begin
        best = valid[0] ? values[0] : 0;
        for (int i = 1; i < N; i++)
          if ((valid[i] ? longint'(values[i]) : 0) < best) begin best = valid[i] ? values[i] : 0; bi = i; end
      end
      checks++;
      if (longint'(value) != best || int'(idx) != bi) begin
        failures++;
        $display("FAIL max=%0b valid=%b got idx %0d val %0d, expected idx %0d val %0d",
                 find_max, valid, idx, value, bi, best);
      end
      // signed max
      for (int i = 0; i < N; i++) svalues[i] = 8'($urandom);
      #1;
      begin
        int sb; int si;
        sb = -1000; si = 0;
        for (int i = 0; i < N; i++) if (int'($signed(svalues[i])) > sb) begin sb = $signed(svalues[i]); si = i; end
        checks++;
        if (int'($signed(svalue)) != sb || int'(sidx) != si) begin
          failures++;
          $display("FAIL signed max got %0d expected %0d", $signed(svalue), sb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
