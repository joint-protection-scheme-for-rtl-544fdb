// fmap_mem: feature-map memory that receives the compressed words.
//
// Write side: an append port. Each accepted word (wr_valid) is stored at the
// write pointer, which then advances; clear resets the pointer to 0 for a new
// layer. words_stored is the number of words held, which is the memory
// footprint that a wrong Hkey inflates. When the memory is full, further words
// are not stored and the sticky overflow flag is set; words_requested counts
// every word offered, stored or not, so the total demand stays visible.
// Read side: synchronous read, rd_data is valid the cycle after rd_en.
//
// The paper only says the compressed data goes "to memory"; this on-chip
// single-write, single-read array, its depth and the overflow behaviour are
// this design's choices. The array is not reset, as an SRAM would not be.
module fmap_mem #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_valid,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  output logic [AW:0]   words_stored,
  output logic [31:0]   words_requested,
  output logic          full,
  output logic          overflow
);

  logic [W-1:0] mem [DEPTH];

  assign full = (words_stored == (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_valid && !full) mem[words_stored[AW-1:0]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      words_stored    <= '0;
      words_requested <= '0;
      overflow        <= 1'b0;
    end else if (clear) begin
      words_stored    <= '0;
      words_requested <= '0;
      overflow        <= 1'b0;
    end else if (wr_valid) begin
      words_requested <= words_requested + 1;
      if (full) overflow     <= 1'b1;
      else      words_stored <= words_stored + 1'b1;
    end
  end

endmodule
