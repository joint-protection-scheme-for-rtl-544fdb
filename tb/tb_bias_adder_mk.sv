// tb_bias_adder_mk: self-checking test of the Mkey bias adder.
// The testbench plays the model provider: it scrambles the two MSBs of a
// random bias with a random vector r, derives the correct key segment for the
// adder's XOR/XNOR gate mix, and checks that the adder restores the bias
// (saturating sum). With a wrong key segment it checks the scrambled result.
// A second, unlocked adder (LOCKED = 0) must add B' as it is, whatever mk.
module tb_bias_adder_mk;
  localparam logic [1:0] MASK = 2'b10;   // bit 1 uses an XNOR gate
  logic signed [15:0] mac_out, a, a_u;
  logic        [15:0] bias_obf;
  logic        [1:0]  mk;
  int checks = 0, failures = 0, corrupted = 0;

  bias_adder_mk #(.H(16), .MKW(2), .XNOR_MASK(MASK)) dut (.mac_out, .bias_obf, .mk, .a);
  bias_adder_mk #(.H(16), .MKW(2), .XNOR_MASK(MASK), .LOCKED(1'b0)) dut_u (.mac_out, .bias_obf, .mk, .a(a_u));

  function automatic logic [15:0] satadd(input logic [15:0] x, input logic [15:0] y);
    int s;
    s = int'($signed(x)) + int'($signed(y));
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return 16'(s);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 600; k++) begin
      logic [15:0] b, bw;
      logic [1:0]  r, kc, kw;
      b  = 16'($urandom);
      r  = 2'($urandom);
      mac_out = (k % 10 == 0) ? 16'sh7F00 : 16'($urandom);
      bias_obf = {b[15:14] ^ r, b[13:0]};
      kc = r ^ MASK;                 // correct key for this gate mix
      mk = kc;
      #1;
      checks++;
      if (a !== satadd(mac_out, b)) begin
        failures++;
        $display("FAIL correct key mac=%h b=%h a=%h", mac_out, b, a);
      end
      kw = kc ^ (2'($urandom % 3) + 2'd1);   // any of the three wrong keys
      mk = kw;
      #1;
      bw = {bias_obf[15:14] ^ kw ^ MASK, bias_obf[13:0]};
      checks++;
      if (a !== satadd(mac_out, bw)) begin
        failures++;
        $display("FAIL wrong key mac=%h b'=%h a=%h", mac_out, bias_obf, a);
      end
      if (bw != b) corrupted++;
      checks++;
      if (a_u !== satadd(mac_out, bias_obf)) begin
        failures++;
        $display("FAIL unlocked adder mac=%h b'=%h a=%h", mac_out, bias_obf, a_u);
      end
    end
    checks++;
    if (corrupted != 600) begin
      failures++;
      $display("FAIL wrong key restored the bias in %0d cases", 600 - corrupted);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
