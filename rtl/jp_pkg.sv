// jp_pkg: shared types, constants and helper functions of the key-protected
// sparsity-aware accelerator datapath.
//
// The data width (16-bit fixed point) follows the paper's experiments. The
// compressed-word format, the word width (one value plus one metadata field),
// the fixed-point scaling and the way default secret constants are generated
// are choices of this design.
package jp_pkg;

  // Compression formats supported by the compression and decompression blocks.
  typedef enum logic [1:0] {
    FMT_BITMAP = 2'd0,   // bitmap words of kept lanes, then kept values
    FMT_RLC    = 2'd1,   // one {zero run, value} word per kept value
    FMT_CSC    = 2'd2    // count word, then one {row index, value} per kept value
  } fmt_e;

  // Width of the widest default secret pattern that key_pattern() produces.
  localparam int unsigned KEY_PATTERN_BITS = 4096;

  // Deterministic pseudo-random bit pattern (xorshift32) used only to give
  // the secret design constants non-trivial default values. A real design
  // would set them from the designer's secret choice.
  function automatic logic [KEY_PATTERN_BITS-1:0] key_pattern(input logic [31:0] seed);
    logic [31:0] s;
    logic [KEY_PATTERN_BITS-1:0] r;
    s = seed ^ 32'h9E37_79B9;
    for (int unsigned k = 0; k < KEY_PATTERN_BITS / 32; k++) begin
      s = s ^ (s << 13);
      s = s ^ (s >> 17);
      s = s ^ (s << 5);
      r[k*32 +: 32] = s;
    end
    return r;
  endfunction

  // Signed saturation of a 48-bit value to 16 bits.
  function automatic logic signed [15:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7FFF;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
