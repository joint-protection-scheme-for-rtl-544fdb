// tb_compression_block: self-checking test of the compression block in all
// three formats (BitMap, RLC, CSC) with 40 lanes, so the bitmap spans two
// words. Random groups with random drop flags (including all-kept and
// all-dropped groups) are compressed; every output word is compared with the
// reference encoder. Phase 1 applies random back-pressure; phase 2 keeps
// out_ready high and checks the rate: one word per cycle, no gap between
// groups.
module tb_compression_block;
  import jp_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 40;
  localparam int G = 60;

  logic clk = 0, rst_n = 0;
  logic [15:0] gvals [G][N];
  bit          gkeep [G][N];
  int checks = 0, failures = 0, fmt_done = 0;

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < G; g++)
      for (int i = 0; i < N; i++) begin
        gvals[g][i] = 16'($urandom);
        if (g == 3)      gkeep[g][i] = 1;
        else if (g == 4) gkeep[g][i] = 0;
        else             gkeep[g][i] = ($urandom % 100) < 40;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  for (genvar f = 0; f < 3; f++) begin : g_fmt
    logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
    logic [N-1:0][15:0] in_data = '0;
    logic [N-1:0]       in_zero = '0;
    logic [31:0]        out_word;
    logic [31:0]        expq [$];
    bit                 lastq [$];
    bit                 phase2 = 0;
    int                 words2 = 0, vcycles2 = 0, gaps2 = 0, groups_seen = 0;
    bit                 started2 = 0;

    compression_block #(.H(16), .N(N), .MEM_W(32), .FMT(fmt_e'(f))) dut (
      .clk, .rst_n, .in_valid, .in_ready, .in_data, .in_zero,
      .out_valid, .out_ready, .out_word, .out_last);

    // collector
    // sampled between clock edges, where all signals are settled
    always @(negedge clk) if (rst_n) begin
      #2;
      if (phase2) begin
        if (out_valid) begin vcycles2++; started2 = 1; end
        else if (started2 && groups_seen < 2 * G) gaps2++;
      end
      if (out_valid && out_ready) begin
        logic [31:0] e;
        bit el;
        checks++;
        if (expq.size() == 0) begin
          failures++;
          $display("FAIL fmt %0d: unexpected word %h", f, out_word);
        end else begin
          e = expq.pop_front();
          el = lastq.pop_front();
          if (out_word !== e || out_last !== el) begin
            failures++;
            $display("FAIL fmt %0d: word %h last %b, expected %h last %b", f, out_word, out_last, e, el);
          end
        end
        if (phase2) words2++;
        if (out_last) groups_seen++;
      end
    end

    initial begin
      @(posedge rst_n);
      for (int p = 0; p < 2; p++) begin
        for (int g = 0; g < G; g++) begin
          logic [15:0] v [];
          bit k [];
          logic [31:0] q [$];
          v = new[N]; k = new[N]; q.delete();
          for (int i = 0; i < N; i++) begin
            v[i] = gvals[g][i]; k[i] = gkeep[g][i];
            in_data[i] = gvals[g][i]; in_zero[i] = !gkeep[g][i];
          end
          encode(f, N, v, k, q);
          foreach (q[j]) begin expq.push_back(q[j]); lastq.push_back(j == q.size() - 1); end
          begin
            bit acc;
            do begin
              @(negedge clk);
              in_valid = 1;
              out_ready = (p == 0) ? (($urandom % 10) < 6) : 1'b1;
              #1;
              acc = in_ready;
            end while (!acc);
            @(posedge clk);
            #1;
          end
        end
        @(negedge clk);
        in_valid = 0;
        while (expq.size() != 0) begin
          if (p == 0) out_ready = ($urandom % 10) < 6;
          @(negedge clk);
        end
        if (p == 0) begin
          phase2 = 1;
        end
      end
      @(posedge clk);
      checks++;
      if (vcycles2 != words2 || gaps2 != 0) begin
        failures++;
        $display("FAIL fmt %0d rate: %0d words in %0d valid cycles, %0d gaps", f, words2, vcycles2, gaps2);
      end
      fmt_done++;
    end
  end

  initial begin
    wait (fmt_done == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
