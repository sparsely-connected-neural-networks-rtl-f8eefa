// relu: the activation function ReLU(a) = max(0, a).
//
// Combinational. A negative signed input gives 0; anything else passes
// unchanged. The output is unsigned and one bit narrower, since it is never
// negative.
module relu #(
  parameter int unsigned W = 19
) (
  input  logic signed [W-1:0] a,
  output logic        [W-2:0] y
);

  assign y = a[W-1] ? '0 : a[W-2:0];

endmodule
