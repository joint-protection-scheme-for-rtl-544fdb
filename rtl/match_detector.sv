// match_detector: Hkey-controlled replacement of the zero detector.
//
// g = f_k(HK_i) & f_x(X'_i). f_x is the AND of x'_j XNOR t_j over all bits, so
// it is '1' exactly when the original ReLU output X was zero. f_k is the
// C-bit equality test of the Hkey segment HK_i against the designer's secret
// HK_STAR. With the correct segment, g flags zeros and the compression block
// drops them; with any other segment g is always '0' and every value,
// zeros included, is stored. The data path output is unaffected either way.
//
// LOCKED = 0 builds a normal zero detector (on X', so still through T) with no
// key input, for lanes left unlocked to shorten the Hkey; hk is then ignored.
//
// Purely combinational, as in the paper's equation. The segment width C and
// the default HK_STAR are this design's choices.
module match_detector #(
  parameter int unsigned H = 16,
  parameter int unsigned C = 8,
  parameter logic [H-1:0] T       = 16'hB4E1,
  parameter logic [C-1:0] HK_STAR = '0,
  parameter bit           LOCKED  = 1'b1
) (
  input  logic [H-1:0] x_mod,   // X'_i from the modified ReLU
  input  logic [C-1:0] hk,      // Hkey segment HK_i
  output logic         is_zero  // g: '1' = value may be discarded
);

  logic f_x, f_k;

  assign f_x     = &(x_mod ~^ T);
  assign f_k     = LOCKED ? &(hk ~^ HK_STAR) : 1'b1;
  assign is_zero = f_k & f_x;

endmodule
