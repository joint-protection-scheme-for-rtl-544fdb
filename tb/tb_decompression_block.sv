// tb_decompression_block: self-checking test of the decompression block in
// all three formats with 40 lanes. The testbench fills a memory model with
// groups encoded by the reference encoder, in which dropped lanes hold T and
// kept lanes hold X' = X ^ T, then checks that every group comes back dense
// with T removed (dropped lanes read as 0), in order, with random
// back-pressure, and that done pulses at the end. Each format also decodes a
// stream in which no lane was dropped (the wrong-Hkey case) and must deliver
// the same dense data.
module tb_decompression_block;
  import jp_pkg::*;
  import tb_ref_pkg::*;

  localparam int N  = 40;
  localparam int G  = 30;
  localparam int AW = 11;
  localparam logic [15:0] T = 16'hB4E1;

  logic clk = 0, rst_n = 0;
  logic [15:0] gx [G][N];     // original ReLU outputs (0 or positive)
  int checks = 0, failures = 0, fmt_done = 0;

  always #5 clk = ~clk;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < G; g++)
      for (int i = 0; i < N; i++)
        gx[g][i] = (g == 2 || ($urandom % 100) < 55) ? 16'h0 : 16'($urandom % 32767 + 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  for (genvar f = 0; f < 3; f++) begin : g_fmt
    logic start = 0, busy, done, rd_en, out_valid, out_ready = 0;
    logic [AW:0]   end_addr = 0;
    logic [AW-1:0] rd_addr;
    logic [31:0]   rd_data;
    logic [N-1:0][15:0] out_data;
    logic [31:0]   mem [2**AW];
    int            ngroups;
    bit            saw_done;

    decompression_block #(.H(16), .N(N), .MEM_W(32), .AW(AW), .FMT(fmt_e'(f)), .T(T)) dut (
      .clk, .rst_n, .start, .end_addr, .busy, .done, .rd_en, .rd_addr, .rd_data,
      .out_valid, .out_ready, .out_data);

    always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];
    always @(posedge clk) if (done) saw_done = 1;

    initial begin
      @(posedge rst_n);
      for (int pass = 0; pass < 2; pass++) begin
        int nw;
        nw = 0;
        // fill memory: pass 0 drops zeros (correct Hkey), pass 1 keeps all
        for (int g = 0; g < G; g++) begin
          logic [15:0] v [];
          bit k [];
          logic [31:0] q [$];
          v = new[N]; k = new[N]; q.delete();
          for (int i = 0; i < N; i++) begin
            v[i] = gx[g][i] ^ T;
            k[i] = (pass == 1) || (gx[g][i] != 0);
          end
          encode(f, N, v, k, q);
          foreach (q[j]) mem[nw + j] = q[j];
          nw += q.size();
        end
        @(negedge clk);
        end_addr = (AW+1)'(nw);
        start = 1;
        @(negedge clk);
        start = 0;
        saw_done = 0;
        ngroups = 0;
        while (ngroups < G) begin
          @(negedge clk);
          out_ready = ($urandom % 4) != 0;
          #1;
          if (out_valid && out_ready) begin
            checks++;
            begin
              int bad;
              bad = 0;
              for (int i = 0; i < N; i++)
                if (out_data[i] !== gx[ngroups][i]) begin
                  bad++;
                  $display("  fmt %0d pass %0d group %0d lane %0d got %h exp %h", f, pass, ngroups, i, out_data[i], gx[ngroups][i]);
                end
              if (bad != 0) failures++;
            end
            ngroups++;
          end
        end
        @(posedge clk);
        #1;
        out_ready = 0;
        repeat (3) @(posedge clk);
        checks++;
        if (!saw_done || busy || out_valid) begin
          failures++;
          $display("FAIL fmt %0d pass %0d: done=%b busy=%b", f, pass, saw_done, busy);
        end
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
