// exp_unit: low-complexity exponential, y = e^x ~= 2^(lambda*x).
//
// The input x is a signed fixed-point number with XF fractional bits. It is
// scaled by LAMBDA (an approximation of log2(e), a 4-bit number with 3
// fractional bits: 4'b1100 = 1.5 for the speech task, 4'b1000 = 1.0 for the
// text task). The product z is split into u = floor(z) and v = z - u in [0,1).
// 2^v is replaced by the straight line v + D, where D is the bias d1 (first
// EXP unit of the softmax) or d2 (second EXP unit), given with 10 fractional
// bits. The result (v + D) * 2^u is formed with a shift and delivered as an
// unsigned number with OF fractional bits, saturated to OW bits.
// All of this follows Section II-C and Section V of the paper; the internal
// alignment to 20 fractional bits and the saturation are this design's own.
// Combinational, no clock.
module exp_unit #(
  parameter int unsigned XW = 9,          // input width (two's complement)
  parameter int unsigned XF = 2,          // input fractional bits (XF+3 <= 20)
  parameter int unsigned OW = 22,         // output width
  parameter int unsigned OF = 16,         // output fractional bits
  parameter logic [3:0]  LAMBDA = 4'b1100, // 1.5, 3 fractional bits
  parameter logic [10:0] D = 11'b01011110111 // bias, 10 fractional bits
) (
  input  logic signed [XW-1:0] x,
  output logic [OW-1:0]        y
);

  localparam int unsigned ZF = XF + 3;    // fractional bits of z
  localparam int unsigned ZW = XW + 5;    // width of z
  localparam int unsigned MF = 20;        // fractional bits of the mantissa
  localparam int unsigned MW = MF + 2;    // mantissa < 3

  logic signed [ZW-1:0] z;
  logic signed [ZW-1:0] u;
  logic [ZF-1:0]        v;
  logic [MW-1:0]        mant;
  logic signed [ZW+8:0] s;
  logic [OW+MW-1:0]     wide;

  always_comb begin
    z    = x * $signed({1'b0, LAMBDA});
    u    = z >>> ZF;
    v    = z[ZF-1:0];
    mant = (MW'(v) << (MF - ZF)) + (MW'(D) << (MF - 10));
    s    = (ZW+9)'(u) + $signed((ZW+9)'(OF)) - $signed((ZW+9)'(MF));
    wide = '0;
    if (s >= 0) begin
      if (s >= $signed((ZW+9)'(OW))) begin
        y = '1;
      end else begin
        wide = (OW+MW)'(mant) << s;
        y    = (|wide[OW+MW-1:OW]) ? '1 : wide[OW-1:0];
      end
    end else if (-s >= $signed((ZW+9)'(MW))) begin
      y = '0;
    end else begin
      wide = (OW+MW)'(mant >> (-s));
      y    = (|wide[OW+MW-1:OW]) ? '1 : wide[OW-1:0];
    end
  end

endmodule
