// bias_adder_mk: bias adder with the model key (Mkey) inserted.
//
// The bias published with the model, B', has its MKW most significant bits
// scrambled by the model provider. Here those bits are combined with this
// lane's Mkey segment MK_i: bit k goes through an XOR gate, or through an
// XNOR gate where the secret mask XNOR_MASK has a '1'. The recovered bias is
// added to the MAC output, giving A_i. With the correct MK_i the original bias
// is restored; with a wrong one the bias MSBs stay scrambled.
//
// LOCKED = 0 builds a plain bias adder without Mkey gates (mk is then
// ignored), for lanes the model provider leaves unobfuscated to shorten the
// Mkey.
//
// Purely combinational. Follows the paper: XOR of the two MSBs of the bias
// with MK_i, optional XNOR gates in place of some XORs, and the option of
// locking only part of the adders. The saturating H-bit
// sum is this design's choice (the paper does not give the adder's overflow
// behaviour).
module bias_adder_mk #(
  parameter int unsigned     H         = 16,
  parameter int unsigned     MKW       = 2,
  parameter logic [MKW-1:0]  XNOR_MASK = '0,
  parameter bit              LOCKED    = 1'b1
) (
  input  logic signed [H-1:0] mac_out,   // MAC output
  input  logic        [H-1:0] bias_obf,  // obfuscated bias B'_i
  input  logic      [MKW-1:0] mk,        // Mkey segment MK_i
  output logic signed [H-1:0] a          // A_i, input of the modified ReLU
);

  logic [H-1:0]     bias;
  logic signed [H:0] sum;

  always_comb begin
    bias = bias_obf;
    // MSB gates: XOR, or XNOR where the secret mask says so.
    if (LOCKED) bias[H-1 -: MKW] = bias_obf[H-1 -: MKW] ^ mk ^ XNOR_MASK;
    sum = {mac_out[H-1], mac_out} + {bias[H-1], bias};
    if (sum[H] != sum[H-1]) a = sum[H] ? {1'b1, {(H-1){1'b0}}} : {1'b0, {(H-1){1'b1}}};
    else                    a = sum[H-1:0];
  end

endmodule
