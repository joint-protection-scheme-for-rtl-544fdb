// relu_t: modified ReLU that hides its zero outputs behind a secret vector T.
//
// Input A = a_{h-1}..a_0 with a_{h-1} the sign bit. The plain ReLU is
// x_{h-1} = 0, x_j = ~a_{h-1} & a_j. The modified ReLU XORs the result with the
// constant secret vector T: x'_{h-1} = t_{h-1}, x'_j = x_j ^ t_j. A zero ReLU
// output therefore leaves this block as T, not as 0, so a plain zero detector
// on these wires does not find the zeros. T is restored when the feature map
// is read back (decompression_block).
//
// Purely combinational. This follows the paper's equations directly; the
// default value of T is an arbitrary choice of this design.
module relu_t #(
  parameter int unsigned H = 16,
  parameter logic [H-1:0] T = 16'hB4E1
) (
  input  logic [H-1:0] a,       // A_i from the bias adder
  output logic [H-1:0] x_mod    // X'_i
);

  logic [H-1:0] x;

  always_comb begin
    x[H-1] = 1'b0;
    for (int j = 0; j < int'(H) - 1; j++) x[j] = ~a[H-1] & a[j];
    x_mod = x ^ T;
  end

endmodule
