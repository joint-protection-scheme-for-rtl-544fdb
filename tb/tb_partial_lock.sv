// tb_partial_lock: the shortened-key configuration of the scheme, with 100
// lanes of which only 64 bias adders carry a 2-bit Mkey segment (a 128-bit
// Mkey) and only every second match detector carries an Hkey segment.
//
// Checks, against an independent reference of MAC, bias recovery and ReLU:
//   correct keys: decompressed data exact; stored words follow the BitMap
//     formula (4 bitmap words per group of 100);
//   wrong Mkey in every lane: outputs change only in the 64 locked lanes;
//   wrong Hkey in every lane: output unchanged; only the locked detectors
//     stop dropping zeros, so the word count lies between the two extremes.
module tb_partial_lock;
  import jp_pkg::*;

  localparam int N = 100, H = 16, C = 8, MKW = 2, K = 2, G = 6, AW = 12;
  localparam logic [H-1:0] T = 16'hB4E1;
  localparam logic [N-1:0][C-1:0]   HKS  = (N*C)'(key_pattern(32'd1));
  localparam logic [N-1:0][MKW-1:0] MASK = (N*MKW)'(key_pattern(32'd2));
  localparam logic [N-1:0] MKL = {36'h0, 64'hFFFF_FFFF_FFFF_FFFF};        // lanes 0..63
  localparam logic [N-1:0] HKL = {25{4'b0101}};                            // even lanes

  logic clk = 0, rst_n = 0;
  logic [N-1:0][C-1:0]   hk = '0;
  logic [N-1:0][MKW-1:0] mk = '0;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [H-1:0] in_act = 0;
  logic [N-1:0][H-1:0] in_weight = '0, in_bias = '0;
  logic mem_clear = 0;
  logic [AW:0] words_stored;
  logic [31:0] words_requested, groups_out, zeros_dropped, stall_cycles;
  logic mem_overflow, rd_start = 0, rd_busy, rd_done, dec_valid, dec_ready = 0;
  logic [N-1:0][H-1:0] dec_data;

  jp_accel_top #(.N(N), .HK_LOCK(HKL), .MK_LOCK(MKL)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic signed [H-1:0] act [G][K];
  logic signed [H-1:0] wt  [G][K][N];
  logic        [H-1:0] bobf [G][N];
  logic        [MKW-1:0] r [N];
  logic        [H-1:0] expd [G][N];
  logic        [H-1:0] got  [G][N];

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [H-1:0] sat(input longint v);
    if (v > 32767) return 16'h7FFF;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  function automatic logic [H-1:0] ref_lane(input int g, input int i, input logic [MKW-1:0] k);
    longint s;
    logic [H-1:0] q, b, a;
    s = 0;
    for (int j = 0; j < K; j++) s += longint'(act[g][j]) * longint'(wt[g][j][i]);
    q = sat(s >>> 8);
    b = bobf[g][i];
    if (MKL[i]) b[H-1 -: MKW] = b[H-1 -: MKW] ^ k ^ MASK[i];
    a = sat(longint'($signed(q)) + longint'($signed(b)));
    return $signed(a) < 0 ? 16'h0 : a;
  endfunction

  task automatic run_layer(output int words);
    int g0;
    @(negedge clk);
    mem_clear = 1;
    @(negedge clk);
    mem_clear = 0;
    g0 = groups_out;
    for (int g = 0; g < G; g++)
      for (int j = 0; j < K; j++) begin
        bit acc;
        do begin
          @(negedge clk);
          in_valid = 1;
          in_last  = (j == K - 1);
          in_act   = act[g][j];
          for (int i = 0; i < N; i++) begin
            in_weight[i] = wt[g][j][i];
            in_bias[i]   = bobf[g][i];
          end
          #1;
          acc = in_ready;
        end while (!acc);
        @(posedge clk);
        #1;
      end
    in_valid = 0;
    while (groups_out != g0 + G) @(negedge clk);
    words = int'(words_stored);
    @(negedge clk);
    rd_start = 1;
    @(negedge clk);
    rd_start = 0;
    dec_ready = 1;
    for (int g = 0; g < G; g++) begin
      do @(negedge clk); while (!dec_valid);
      for (int i = 0; i < N; i++) got[g][i] = dec_data[i];
      @(posedge clk);
      #1;
    end
    dec_ready = 0;
  endtask

  initial begin
    int w1, w2, w3, exp1, exp3, m, dl, du;
    logic [N-1:0][MKW-1:0] mk_ok;
    for (int i = 0; i < N; i++) begin
      r[i] = MKL[i] ? MKW'($urandom) : '0;
      mk_ok[i] = r[i] ^ MASK[i];
    end
    for (int g = 0; g < G; g++) begin
      for (int j = 0; j < K; j++) begin
        act[g][j] = 16'($signed($urandom % 512) - 256);
        for (int i = 0; i < N; i++) wt[g][j][i] = 16'($signed($urandom % 512) - 256);
      end
      for (int i = 0; i < N; i++) begin
        logic [H-1:0] b;
        b = 16'($signed($urandom % 401) - 200);
        bobf[g][i] = {b[H-1 -: MKW] ^ r[i], b[H-MKW-1:0]};
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // correct keys
    exp1 = 0; exp3 = 0;
    for (int g = 0; g < G; g++) begin
      exp1 += 4; exp3 += 4;
      for (int i = 0; i < N; i++) begin
        expd[g][i] = ref_lane(g, i, mk_ok[i]);
        exp1 += int'(expd[g][i] != 0);
        exp3 += int'(expd[g][i] != 0 || HKL[i]);
      end
    end
    hk = HKS; mk = mk_ok;
    run_layer(w1);
    m = 0;
    for (int g = 0; g < G; g++) for (int i = 0; i < N; i++) m += int'(got[g][i] !== expd[g][i]);
    chk(m == 0, $sformatf("correct keys: %0d mismatches", m));
    chk(w1 == exp1, $sformatf("correct keys: %0d words, expected %0d", w1, exp1));

    // wrong Hkey everywhere: only locked detectors keep zeros
    for (int i = 0; i < N; i++) hk[i] = ~HKS[i];
    run_layer(w3);
    m = 0;
    for (int g = 0; g < G; g++) for (int i = 0; i < N; i++) m += int'(got[g][i] !== expd[g][i]);
    chk(m == 0, $sformatf("wrong Hkey: %0d mismatches", m));
    chk(w3 == exp3, $sformatf("wrong Hkey: %0d words, expected %0d", w3, exp3));
    chk(w3 > w1 && w3 < G * (4 + N), "wrong Hkey: partial growth");
    $display("partial Hkey lock: %0d -> %0d words (all lanes locked would give %0d)", w1, w3, G * (4 + N));

    // wrong Mkey everywhere: only the 64 locked adders corrupt
    hk = HKS;
    for (int i = 0; i < N; i++) mk[i] = ~mk_ok[i];
    run_layer(w2);
    dl = 0; du = 0; m = 0;
    for (int g = 0; g < G; g++)
      for (int i = 0; i < N; i++) begin
        m += int'(got[g][i] !== ref_lane(g, i, mk[i]));
        if (got[g][i] !== expd[g][i]) begin
          if (MKL[i]) dl++; else du++;
        end
      end
    chk(m == 0, $sformatf("wrong Mkey: %0d mismatches with the reference", m));
    chk(dl > 0 && du == 0, $sformatf("wrong Mkey: %0d locked-lane and %0d unlocked-lane outputs changed", dl, du));
    $display("partial Mkey lock: %0d of %0d outputs of locked lanes changed, %0d of unlocked lanes", dl, G * 64, du);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
