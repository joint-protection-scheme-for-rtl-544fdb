// tb_fmap_mem: self-checking test of the feature-map memory.
// Appends random words, reads them all back, checks the word counters, then
// overfills it and checks the overflow flag, the demand counter and that the
// stored words were not overwritten; finally checks clear.
module tb_fmap_mem;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0, rd_en = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [3:0]  rd_addr = 0;
  logic [4:0]  words_stored;
  logic [31:0] words_requested;
  logic full, overflow;
  logic [31:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  fmap_mem #(.W(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      wr_valid = 1;
      wr_data = $urandom;
      shadow[n] = wr_data;
    end
    @(negedge clk);
    wr_valid = 0;
    chk(words_stored == 10 && words_requested == 10 && !full && !overflow, "counts after 10");
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 4'(n);
      @(negedge clk);
      rd_en = 0;
      chk(rd_data == shadow[n], $sformatf("read %0d", n));
    end
    for (int n = 10; n < 20; n++) begin
      @(negedge clk);
      wr_valid = 1;
      wr_data = $urandom;
      if (n < DEPTH) shadow[n] = wr_data;
    end
    @(negedge clk);
    wr_valid = 0;
    chk(int'(words_stored) == DEPTH && full, "full");
    chk(overflow, "overflow flagged");
    chk(words_requested == 20, "demand counted");
    for (int n = 0; n < DEPTH; n++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 4'(n);
      @(negedge clk);
      rd_en = 0;
      chk(rd_data == shadow[n], $sformatf("read back %0d", n));
    end
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    chk(words_stored == 0 && words_requested == 0 && !overflow && !full, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
