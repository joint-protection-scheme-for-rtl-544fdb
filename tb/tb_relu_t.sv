// tb_relu_t: self-checking test of the modified ReLU.
// Drives edge values and random inputs and checks X' = ReLU(A) ^ T, with the
// reference ReLU computed on the signed integer value of A.
module tb_relu_t;
  localparam logic [15:0] T = 16'hC35A;
  logic [15:0] a, x_mod;
  int checks = 0, failures = 0;

  relu_t #(.H(16), .T(T)) dut (.a, .x_mod);

  task automatic check(input logic [15:0] v);
    logic [15:0] expv;
    a = v;
    #1;
    expv = ($signed(v) < 0) ? 16'd0 : v;
    checks++;
    if (x_mod !== (expv ^ T)) begin
      failures++;
      $display("FAIL a=%h x_mod=%h exp=%h", v, x_mod, expv ^ T);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h0000); check(16'h0001); check(16'h7FFF); check(16'h8000);
    check(16'hFFFF); check(16'h1234); check(16'hC000);
    for (int k = 0; k < 500; k++) check(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
