// tb_workload_sparsity: memory growth under a wrong Hkey for the three
// compression formats, on output feature maps with the zero fractions the
// paper measured for AlexNet (59 % zeros after conv1, 81 % after conv2).
//
// Three copies of the accelerator (BitMap, RLC, CSC) receive the same layers.
// Each lane computes weight * 1.0 with a zero bias, so the testbench sets the
// ReLU output of every lane directly: negative weights give zeros. Every
// layer runs once with the correct Hkey and once with a wrong one. Checks:
// stored words equal the reference formula of each format; decompressed data
// is the same under both keys; the growth ratio is larger for the sparser
// layer; BitMap grows least. The ratios are printed for comparison with the
// paper's per-layer results (their layers are far larger than the 16 groups
// of 128 values simulated here).
module tb_workload_sparsity;
  import jp_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 128, H = 16, C = 8, MKW = 2, G = 16, AW = 12;
  localparam logic [N-1:0][C-1:0]   HKS  = (N*C)'(key_pattern(32'd1));
  localparam logic [N-1:0][MKW-1:0] MASK = (N*MKW)'(key_pattern(32'd2));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, fmt_done = 0;
  logic [H-1:0] x [2][G][N];       // wanted ReLU outputs per layer
  int           words [3][2][2];   // [fmt][layer][wrong key]
  real          ratio [3][2];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 2; l++)
      for (int g = 0; g < G; g++)
        for (int i = 0; i < N; i++)
          x[l][g][i] = (($urandom % 100) < ((l == 0) ? 59 : 81)) ? 16'h0 : 16'(1 + $urandom % 20000);
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  for (genvar f = 0; f < 3; f++) begin : g_fmt
    logic [N-1:0][C-1:0]   hk = '0;
    logic [N-1:0][MKW-1:0] mk = MASK;     // zero bias: r = 0, key = gate mask
    logic in_valid = 0, in_ready, in_last = 1;
    logic [H-1:0] in_act = 16'h0100;      // 1.0 in Q8.8
    logic [N-1:0][H-1:0] in_weight = '0, in_bias = '0;
    logic mem_clear = 0, mem_overflow, rd_start = 0, rd_busy, rd_done, dec_valid, dec_ready = 0;
    logic [AW:0] words_stored;
    logic [31:0] words_requested, groups_out, zeros_dropped, stall_cycles;
    logic [N-1:0][H-1:0] dec_data;

    jp_accel_top #(.FMT(fmt_e'(f))) dut (
      .clk, .rst_n, .hk, .mk, .in_valid, .in_ready, .in_last, .in_act, .in_weight, .in_bias,
      .mem_clear, .words_stored, .words_requested, .mem_overflow, .groups_out, .zeros_dropped,
      .stall_cycles, .rd_start, .rd_busy, .rd_done, .dec_valid, .dec_ready, .dec_data);

    initial begin
      @(posedge rst_n);
      for (int l = 0; l < 2; l++)
        for (int wk = 0; wk < 2; wk++) begin
          int g0, expw, mism;
          for (int i = 0; i < N; i++) hk[i] = (wk != 0) ? ~HKS[i] : HKS[i];
          @(negedge clk);
          mem_clear = 1;
          @(negedge clk);
          mem_clear = 0;
          g0 = groups_out;
          expw = 0;
          for (int g = 0; g < G; g++) begin
            bit acc;
            int kept;
            bit trail;
            kept = 0;
            for (int i = 0; i < N; i++) begin
              in_weight[i] = (x[l][g][i] == 0) ? 16'hFF00 : x[l][g][i];   // -1.0 for zeros
              kept += int'(wk == 1 || x[l][g][i] != 0);
            end
            trail = (wk == 0) && (x[l][g][N-1] == 0);
            expw += words_for(f, N, kept, trail);
            do begin
              @(negedge clk);
              in_valid = 1;
              #1;
              acc = in_ready;
            end while (!acc);
            @(posedge clk);
            #1;
            in_valid = 0;
          end
          while (groups_out != g0 + G) @(negedge clk);
          words[f][l][wk] = int'(words_stored);
          chk(words[f][l][wk] == expw, $sformatf("fmt %0d layer %0d key %0d: %0d words, expected %0d", f, l, wk, words[f][l][wk], expw));
          // read back and compare
          @(negedge clk);
          rd_start = 1;
          @(negedge clk);
          rd_start = 0;
          mism = 0;
          dec_ready = 1;
          for (int g = 0; g < G; g++) begin
            do @(negedge clk); while (!dec_valid);
            for (int i = 0; i < N; i++) if (dec_data[i] !== x[l][g][i]) mism++;
            @(posedge clk);
            #1;
          end
          dec_ready = 0;
          chk(mism == 0, $sformatf("fmt %0d layer %0d key %0d: %0d decompressed mismatches", f, l, wk, mism));
        end
      for (int l = 0; l < 2; l++) ratio[f][l] = real'(words[f][l][1]) / real'(words[f][l][0]);
      fmt_done++;
    end
  end

  initial begin
    automatic string nm [3] = '{"BitMap", "RLC", "CSC"};
    wait (fmt_done == 3);
    for (int f = 0; f < 3; f++) begin
      $display("%-6s  59%% zeros: %0d -> %0d words (x%0.2f)   81%% zeros: %0d -> %0d words (x%0.2f)",
               nm[f], words[f][0][0], words[f][0][1], ratio[f][0], words[f][1][0], words[f][1][1], ratio[f][1]);
      chk(ratio[f][1] > ratio[f][0], $sformatf("%s: sparser layer grows more", nm[f]));
      chk(ratio[f][0] > 1.0, $sformatf("%s: wrong Hkey grows memory", nm[f]));
    end
    for (int l = 0; l < 2; l++)
      chk(ratio[0][l] < ratio[1][l] && ratio[0][l] < ratio[2][l], $sformatf("BitMap grows least (layer %0d)", l));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
