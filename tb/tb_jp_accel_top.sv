// tb_jp_accel_top: end-to-end test of the protected accelerator datapath at
// its default size (128 lanes, BitMap compression, 4096-word memory).
//
// The testbench plays both the chip designer (it knows the secret Hkey HK*,
// the XOR/XNOR gate mix of the bias adders and T) and the model provider (it
// scrambles the two bias MSBs of every lane with a per-lane random vector and
// derives the matching Mkey). A reference model computes each lane's MAC sum,
// fixed-point scaling, recovered bias, saturating add and ReLU independently.
// Layers run:
//   1. correct Hkey and Mkey: decompressed data equals the reference, zeros
//      are dropped, memory words equal the BitMap formula;
//   2. wrong Hkey in every lane: same decompressed data, no zero dropped,
//      4 + 128 words per group, more cycles than layer 1;
//   3. wrong Hkey in half of the lanes: words between layers 1 and 2;
//   4. wrong Mkey: decompressed data follows the scrambled biases and differs
//      from layer 1;
//   5. wrong Hkey on 32 groups: 4224 words overflow the 4096-word memory.
// Each mechanism (zero dropping, Hkey inflation, compression stall, Mkey
// corruption, memory overflow) is counted and must occur at least once.
module tb_jp_accel_top;
  import jp_pkg::*;

  localparam int N = 128, H = 16, C = 8, MKW = 2, K = 3, GMAX = 32, AW = 12;
  localparam logic [H-1:0] T = 16'hB4E1;
  localparam logic [N-1:0][C-1:0]   HKS  = (N*C)'(key_pattern(32'd1));
  localparam logic [N-1:0][MKW-1:0] MASK = (N*MKW)'(key_pattern(32'd2));

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

  jp_accel_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cnt_drop = 0, cnt_inflate = 0, cnt_stall = 0, cnt_mk = 0, cnt_ovf = 0;

  // stimulus of one layer
  logic signed [H-1:0] act  [GMAX][K];
  logic signed [H-1:0] wt   [GMAX][K][N];
  logic        [H-1:0] bobf [GMAX][N];
  logic        [MKW-1:0] r  [N];          // model provider's scrambling vectors
  logic        [H-1:0] expd [GMAX][N];    // reference ReLU outputs
  logic        [H-1:0] ref1 [GMAX][N];    // layer 1 reference

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

  // reference of one lane for key segment k
  function automatic logic [H-1:0] ref_lane(input int g, input int i, input logic [MKW-1:0] k);
    longint s;
    logic [H-1:0] q, b, a;
    s = 0;
    for (int j = 0; j < K; j++) s += longint'(act[g][j]) * longint'(wt[g][j][i]);
    q = sat(s >>> 8);
    b = bobf[g][i];
    b[H-1 -: MKW] = b[H-1 -: MKW] ^ k ^ MASK[i];
    a = sat(longint'($signed(q)) + longint'($signed(b)));
    return $signed(a) < 0 ? 16'h0 : a;
  endfunction

  task automatic make_data(input int G);
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
  endtask

  // run one layer: returns words stored, cycles taken and decompressed mismatches
  task automatic run_layer(input int G, input bit readback, output int words, output int cycles,
                           output int mism, output int dropped);
    int t0, g0, d0, nz;
    @(negedge clk);
    mem_clear = 1;
    @(negedge clk);
    mem_clear = 0;
    g0 = groups_out;
    d0 = zeros_dropped;
    t0 = int'($time);
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
          if (!acc) cnt_stall++;
        end while (!acc);
        @(posedge clk);
        #1;
      end
    in_valid = 0;
    in_last  = 0;
    while (groups_out != g0 + G) @(negedge clk);
    cycles  = (int'($time) - t0) / 10;
    words   = int'(words_stored);
    dropped = zeros_dropped - d0;
    mism = 0;
    if (readback) begin
      @(negedge clk);
      rd_start = 1;
      @(negedge clk);
      rd_start = 0;
      for (int g = 0; g < G; g++) begin
        bit hs;
        do begin
          @(negedge clk);
          dec_ready = ($urandom % 3) != 0;
          #1;
          hs = dec_valid && dec_ready;
        end while (!hs);
        for (int i = 0; i < N; i++) if (dec_data[i] !== expd[g][i]) mism++;
        @(posedge clk);
        #1;
        dec_ready = 0;
      end
      repeat (4) @(negedge clk);
      chk(!rd_busy, "read-back finished");
    end
  endtask

  initial begin
    int w1, w2, w3, w4, w5, c1, c2, c3, c4, c5, m1, m2, m3, m4, m5, d1, d2, d3, d4, d5;
    int nz, exp_w1, exp_w3, diff;
    logic [N-1:0][MKW-1:0] mk_ok;
    logic [N-1:0][C-1:0]   hk_bad;
    for (int i = 0; i < N; i++) begin
      r[i] = MKW'($urandom);
      mk_ok[i] = r[i] ^ MASK[i];
      hk_bad[i] = HKS[i] ^ C'(1 + $urandom % (2**C - 1));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- layer 1: correct keys
    make_data(8);
    nz = 0;
    for (int g = 0; g < 8; g++)
      for (int i = 0; i < N; i++) begin
        expd[g][i] = ref_lane(g, i, mk_ok[i]);
        ref1[g][i] = expd[g][i];
        nz += int'(expd[g][i] != 0);
      end
    exp_w1 = 8 * 4 + nz;
    hk = HKS; mk = mk_ok;
    run_layer(8, 1, w1, c1, m1, d1);
    $display("layer 1 (correct keys): %0d words, %0d cycles, %0d zeros dropped", w1, c1, d1);
    chk(m1 == 0, $sformatf("layer 1 decompressed data (%0d mismatches)", m1));
    chk(w1 == exp_w1, $sformatf("layer 1 words %0d expected %0d", w1, exp_w1));
    chk(d1 == 8 * N - nz, "layer 1 zeros dropped");
    if (d1 > 0) cnt_drop++;

    // ---- layer 2: wrong Hkey everywhere, same data
    hk = hk_bad;
    run_layer(8, 1, w2, c2, m2, d2);
    $display("layer 2 (wrong Hkey): %0d words, %0d cycles, ratio %0.2f", w2, c2, real'(w2) / real'(w1));
    chk(m2 == 0, $sformatf("layer 2 output unchanged by wrong Hkey (%0d mismatches)", m2));
    chk(w2 == 8 * (4 + N), "layer 2 words");
    chk(d2 == 0, "layer 2 no zero dropped");
    chk(c2 > c1, "layer 2 slower than layer 1");
    if (w2 > w1 && m2 == 0) cnt_inflate++;

    // ---- layer 3: wrong Hkey in the upper half of the lanes
    for (int i = 0; i < N; i++) hk[i] = (i < N / 2) ? HKS[i] : hk_bad[i];
    exp_w3 = 8 * 4;
    for (int g = 0; g < 8; g++)
      for (int i = 0; i < N; i++) exp_w3 += int'(i >= N / 2 || expd[g][i] != 0);
    run_layer(8, 1, w3, c3, m3, d3);
    $display("layer 3 (half wrong Hkey): %0d words", w3);
    chk(m3 == 0, "layer 3 decompressed data");
    chk(w3 == exp_w3, $sformatf("layer 3 words %0d expected %0d", w3, exp_w3));
    chk(w3 > w1 && w3 < w2, "layer 3 between layers 1 and 2");

    // ---- layer 4: wrong Mkey (every lane), correct Hkey
    hk = HKS;
    for (int i = 0; i < N; i++) mk[i] = mk_ok[i] ^ MKW'(1 + $urandom % (2**MKW - 1));
    diff = 0;
    for (int g = 0; g < 8; g++)
      for (int i = 0; i < N; i++) begin
        expd[g][i] = ref_lane(g, i, mk[i]);
        diff += int'(expd[g][i] != ref1[g][i]);
      end
    run_layer(8, 1, w4, c4, m4, d4);
    $display("layer 4 (wrong Mkey): %0d of %0d outputs differ from layer 1", diff, 8 * N);
    chk(m4 == 0, $sformatf("layer 4 follows scrambled biases (%0d mismatches)", m4));
    chk(diff > 8 * N / 4, "layer 4 output corrupted");
    if (diff > 0 && m4 == 0) cnt_mk++;

    // ---- layer 5: overflow of the feature-map memory under a wrong Hkey
    mk = mk_ok;
    hk = hk_bad;
    make_data(32);
    run_layer(32, 0, w5, c5, m5, d5);
    $display("layer 5 (wrong Hkey, 32 groups): %0d words requested, %0d stored, overflow %b",
             words_requested, w5, mem_overflow);
    chk(words_requested == 32 * (4 + N), "layer 5 words requested");
    chk(w5 == 4096 && mem_overflow, "layer 5 overflow");
    if (mem_overflow) cnt_ovf++;

    cnt_stall = (stall_cycles > 0) ? cnt_stall : 0;
    $display("mechanisms: zero-drop %0d, Hkey inflation %0d, stall %0d (dut %0d), Mkey corruption %0d, overflow %0d",
             cnt_drop, cnt_inflate, cnt_stall, stall_cycles, cnt_mk, cnt_ovf);
    chk(cnt_drop > 0, "zero dropping happened");
    chk(cnt_inflate > 0, "Hkey inflation happened");
    chk(cnt_stall > 0, "stall happened");
    chk(cnt_mk > 0, "Mkey corruption happened");
    chk(cnt_ovf > 0, "overflow happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
