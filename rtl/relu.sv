// relu: rectified linear unit, y = max(0, x), for a signed fixed-point word.
//
// As in the paper's activation figure, it is one comparator (here the sign bit,
// which is the comparison x < 0) and one 2:1 multiplexer choosing between x and
// zero. Purely combinational; the format is unchanged, so W is the activation
// word length (25 bits, from the <25,9> activation format).
module relu #(
  parameter int W = 25
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  always_comb y = x[W-1] ? '0 : x;
endmodule
