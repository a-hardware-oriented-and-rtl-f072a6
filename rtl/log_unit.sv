// log_unit: low-complexity natural logarithm, ln F ~= (1/lambda)*(omega + kappa - 1).
//
// F is an unsigned fixed-point number with FF fractional bits. A leading-one
// detector gives omega = floor(log2 F); the bits below the leading one,
// read as a fraction, are kappa - 1 with kappa = F / 2^omega in [1,2), which
// stands in for log2(kappa) (Eq. 8 of the paper). The sum is multiplied by
// INV_LAMBDA, a 4-bit number with 3 fractional bits approximating ln 2
// (4'b0101 = 0.625 for the speech task). The result is signed with 16
// fractional bits; it is negative when F < 1. F = 0 gives 0 (cannot happen
// in the softmax, where the largest term is at least d1).
// The approximation is the paper's; the 16-bit fraction and the output
// format are this design's. Combinational.
module log_unit #(
  parameter int unsigned FW = 22,          // input width
  parameter int unsigned FF = 16,          // input fractional bits
  parameter int unsigned LW = 24,          // output width (signed, 16 frac bits)
  parameter logic [3:0]  INV_LAMBDA = 4'b0101
) (
  input  logic [FW-1:0]        f,
  output logic signed [LW-1:0] ln_f
);

  localparam int unsigned PW = $clog2(FW);

  logic [PW-1:0]        pos;
  logic                 found;
  logic [FW-1:0]        norm;
  logic signed [LW+4:0] log2v;
  logic signed [LW+4:0] prod;

  lod #(.WIDTH(FW)) u_lod (.in(f), .pos(pos), .found(found));

  always_comb begin
    norm  = f << (PW'(FW - 1) - pos);
    log2v = ($signed((LW+5)'(pos)) - $signed((LW+5)'(FF))) <<< 16;
    log2v = log2v + $signed((LW+5)'(norm[FW-2 -: 16]));
    prod  = log2v * $signed({1'b0, INV_LAMBDA});
    ln_f  = found ? LW'(prod >>> 3) : '0;
  end

endmodule
