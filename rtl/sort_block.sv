// sort_block: finds the smallest or the largest entry of a register group.
//
// `find_max` selects the mode. The output is the index and value of the chosen
// entry; on ties the lowest index wins. Entries whose `valid` bit is low are
// treated as 0 in min mode (so an empty slot is always the first to be
// replaced) and are skipped in max mode. The block is combinational: a
// comparison chain over all N entries, fast enough for the serial decoder.
// The paper names a "sorting block" that finds min(Pr) of B (Algorithm 6,
// lines 16 and 37), the maximum of B-hat (Algorithm 5 and the final output),
// and y_max in the softmax (Fig. 9); the linear scan is this design's choice.
module sort_block #(
  parameter int unsigned N     = 8,
  parameter int unsigned WIDTH = 30,
  parameter bit          SIGNED_CMP = 1'b0
) (
  input  logic [N-1:0][WIDTH-1:0] values,
  input  logic [N-1:0]            valid,
  input  logic                    find_max,
  output logic [$clog2(N)-1:0]    idx,
  output logic [WIDTH-1:0]        value,
  output logic                    any_valid
);

  function automatic logic less(input logic [WIDTH-1:0] a, input logic [WIDTH-1:0] b);
    if (SIGNED_CMP) return $signed(a) < $signed(b);
    else            return a < b;
  endfunction

  logic [WIDTH-1:0] v;
  logic             seen;

  always_comb begin
    v         = '0;
    seen      = 1'b0;
    idx       = '0;
    value     = '0;
    any_valid = |valid;
    if (find_max) begin
      for (int unsigned i = 0; i < N; i++) begin
        if (valid[i] && (!seen || less(value, values[i]))) begin
          value = values[i];
          idx   = i[$clog2(N)-1:0];
          seen  = 1'b1;
        end
      end
    end else begin
      value = valid[0] ? values[0] : '0;
      for (int unsigned i = 1; i < N; i++) begin
        v = valid[i] ? values[i] : '0;
        if (less(v, value)) begin
          value = v;
          idx   = i[$clog2(N)-1:0];
        end
      end
    end
  end

endmodule
