// tb_mac_unit: self-checking test of one MAC lane.
// Random kernels of 1 to 9 beats; the reference sum is computed with integer
// arithmetic, shifted by FRAC and saturated. Checks the result, that it
// appears the cycle after the last beat, and that an untaken result holds
// the lane (in_ready low, result stable).
module tb_mac_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, res_valid, res_ready = 0;
  logic signed [15:0] in_act = 0, in_weight = 0, res;
  int checks = 0, failures = 0, cycle = 0;

  mac_unit #(.H(16), .FRAC(8), .ACC_W(40)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_res(input longint s);
    longint q;
    q = s >>> 8;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return 16'(q);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      int nb;
      longint s;
      int last_cycle;
      nb = 1 + ($urandom % 9);
      s = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid  = 1;
        in_last   = (b == nb - 1);
        in_act    = (g % 17 == 0) ? 16'sh7FFF : 16'($urandom);
        in_weight = (g % 17 == 0) ? 16'sh7FFF : 16'($urandom);
        s += longint'(in_act) * longint'(in_weight);
        @(posedge clk);
        last_cycle = cycle;
        checks++;
        if (!in_ready) begin failures++; $display("FAIL in_ready low while free"); end
      end
      @(negedge clk);
      in_valid = 0;
      in_last  = 0;
      checks++;
      if (!res_valid || res !== ref_res(s)) begin
        failures++;
        $display("FAIL g=%0d valid=%b res=%h exp=%h", g, res_valid, res, ref_res(s));
      end
      // hold the result for a few cycles: lane must stall and keep it
      repeat (1 + $urandom % 3) begin
        @(negedge clk);
        checks++;
        if (in_ready || !res_valid || res !== ref_res(s)) begin
          failures++;
          $display("FAIL hold: in_ready=%b valid=%b", in_ready, res_valid);
        end
      end
      res_ready = 1;
      @(negedge clk);
      res_ready = 0;
      checks++;
      if (res_valid) begin failures++; $display("FAIL result not released"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
