// lod: leading-one detector.
//
// Returns the bit position of the most significant 1 of `in` and a `found`
// flag that is low when `in` is zero (pos is then 0). Purely combinational.
// The beam search shares one instance between two jobs, as the paper
// suggests: finding the first free slot of the d array while it rebuilds the
// beam (Algorithm 3) and finding the leading 1 of the largest probability when
// it rescales the beam (Algorithm 5). The softmax LOG unit has its own copy to
// split F into exponent and mantissa. The priority-encoder structure is this
// design's choice; the paper only names the function.
module lod #(
  parameter int unsigned WIDTH = 30
) (
  input  logic [WIDTH-1:0]         in,
  output logic [$clog2(WIDTH)-1:0] pos,
  output logic                     found
);

  always_comb begin
    pos   = '0;
    found = 1'b0;
    for (int unsigned b = 0; b < WIDTH; b++) begin
      if (in[b]) begin
        pos   = b[$clog2(WIDTH)-1:0];
        found = 1'b1;
      end
    end
  end

endmodule
