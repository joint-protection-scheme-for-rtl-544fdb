// tb_match_detector: self-checking test of the Hkey match detector.
// With the correct key segment the detector must flag exactly X' == T (a zero
// ReLU output); with any wrong segment it must never flag. A second,
// unlocked detector (LOCKED = 0) must flag X' == T under any key.
module tb_match_detector;
  localparam logic [15:0] T  = 16'hC35A;
  localparam logic [7:0]  HS = 8'h6B;
  logic [15:0] x_mod;
  logic [7:0]  hk;
  logic        is_zero, is_zero_u;
  int checks = 0, failures = 0;

  match_detector #(.H(16), .C(8), .T(T), .HK_STAR(HS)) dut (.x_mod, .hk, .is_zero);
  match_detector #(.H(16), .C(8), .T(T), .HK_STAR(HS), .LOCKED(1'b0)) dut_u (.x_mod, .hk, .is_zero(is_zero_u));

  task automatic check(input logic [15:0] x, input logic [7:0] k);
    logic expv;
    x_mod = x; hk = k;
    #1;
    expv = (k == HS) && (x == T);
    checks++;
    if (is_zero !== expv) begin
      failures++;
      $display("FAIL x=%h hk=%h g=%b exp=%b", x, k, is_zero, expv);
    end
    checks++;
    if (is_zero_u !== (x == T)) begin
      failures++;
      $display("FAIL unlocked x=%h hk=%h g=%b", x, k, is_zero_u);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // correct key: zero (X' = T) flagged, one-bit-off values not flagged
    check(T, HS);
    for (int b = 0; b < 16; b++) check(T ^ (16'd1 << b), HS);
    // every wrong key with a zero value: never flagged
    for (int k = 0; k < 256; k++) check(T, 8'(k));
    // random mixes
    for (int k = 0; k < 300; k++) check(($urandom % 2 != 0) ? T : 16'($urandom), ($urandom % 2 != 0) ? HS : 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
