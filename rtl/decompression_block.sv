// decompression_block: reads compressed words back from the feature-map memory,
// rebuilds each dense group of N values and removes the secret vector T.
//
// After start, the block walks the memory from address 0 up to end_addr,
// decoding one group at a time in the word format of compression_block
// (FMT). Every lane starts a group as 0; each stored value v is written to its
// lane as v ^ T, which undoes the modified ReLU (the sign bit becomes 0 again).
// A zero that was stored because of a wrong Hkey arrives as T and so also
// decodes to 0: the decompressed data is the same with either key, only the
// number of words differs. A finished group is offered on out_data with
// out_valid until out_ready; done pulses when the last group has been taken.
//
// Timing: two cycles per memory word (address, then data), plus the output
// handshake per group. The paper states that T is added back when the feature
// map is read from memory and that the MACs take decompressed data; the read
// sequencing and decoding details are this design's own.
module decompression_block
  import jp_pkg::*;
#(
  parameter int unsigned  H     = 16,
  parameter int unsigned  N     = 128,
  parameter int unsigned  MEM_W = 32,
  parameter int unsigned  AW    = 12,
  parameter fmt_e         FMT   = FMT_BITMAP,
  parameter logic [H-1:0] T     = 16'hB4E1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [AW:0]         end_addr,   // number of words to decode
  output logic                busy,
  output logic                done,
  output logic                rd_en,
  output logic [AW-1:0]       rd_addr,
  input  logic [MEM_W-1:0]    rd_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N-1:0][H-1:0] out_data
);

  localparam int unsigned NBW   = (N + MEM_W - 1) / MEM_W;
  localparam int unsigned BW_W  = (NBW > 1) ? $clog2(NBW) : 1;
  localparam int unsigned IDX_W = $clog2(N + 1);
  localparam int unsigned LIDX_W = (N > 1) ? $clog2(N) : 1;   // lane index

  typedef enum logic [2:0] {S_IDLE, S_RD, S_WT, S_OUT} state_e;

  state_e               state_q;
  logic [AW:0]          addr_q;
  logic                 hdr_q;          // next word is bitmap/count metadata
  logic [BW_W-1:0]      bw_q;
  logic [NBW*MEM_W-1:0] bmap_q;
  logic [IDX_W-1:0]     pos_q;          // RLC lane position, CSC remaining count

  logic [H-1:0]         val;
  logic [MEM_W-H-1:0]   meta;
  logic [N-1:0]         bm_lanes;
  logic [IDX_W-1:0]     ff_idx;
  logic [IDX_W:0]       rlc_lane;
  logic [NBW*MEM_W-1:0] bmap_nxt;       // bitmap with the arriving chunk

  assign val      = rd_data[H-1:0];
  assign meta     = rd_data[MEM_W-1:H];
  assign bm_lanes = bmap_q[N-1:0];
  assign rlc_lane = (IDX_W+1)'(pos_q) + (IDX_W+1)'(meta);

  always_comb begin
    bmap_nxt = bmap_q;
    bmap_nxt[bw_q*MEM_W +: MEM_W] = rd_data;
  end

  always_comb begin
    ff_idx = '0;
    for (int i = int'(N) - 1; i >= 0; i--) begin
      if (bm_lanes[i]) ff_idx = IDX_W'(i);
    end
  end

  assign busy      = (state_q != S_IDLE);
  assign out_valid = (state_q == S_OUT);
  assign rd_en     = (state_q == S_RD);
  assign rd_addr   = addr_q[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      addr_q   <= '0;
      hdr_q    <= 1'b0;
      bw_q     <= '0;
      bmap_q   <= '0;
      pos_q    <= '0;
      out_data <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            addr_q   <= '0;
            out_data <= '0;
            hdr_q    <= (FMT != FMT_RLC);
            bw_q     <= '0;
            pos_q    <= '0;
            state_q  <= (end_addr == '0) ? S_IDLE : S_RD;
            done     <= (end_addr == '0);
          end
        end
        S_RD: state_q <= S_WT;
        S_WT: begin
          addr_q  <= addr_q + 1'b1;
          state_q <= S_RD;
          unique case (FMT)
            FMT_BITMAP: begin
              if (hdr_q) begin
                bmap_q <= bmap_nxt;
                bw_q   <= bw_q + 1'b1;
                if (32'(bw_q) == NBW - 1) begin
                  hdr_q <= 1'b0;
                  // a group with no kept lane ends with its bitmap
                  if (bmap_nxt[N-1:0] == '0) state_q <= S_OUT;
                end
              end else begin
                out_data[ff_idx[LIDX_W-1:0]] <= val ^ T;
                bmap_q[ff_idx[LIDX_W-1:0]] <= 1'b0;
                if ((bm_lanes & ~(N'(1) << ff_idx)) == '0) state_q <= S_OUT;
              end
            end
            FMT_CSC: begin
              if (hdr_q) begin
                pos_q <= IDX_W'(rd_data);
                hdr_q <= 1'b0;
                if (IDX_W'(rd_data) == '0) state_q <= S_OUT;
              end else begin
                out_data[IDX_W'(meta)] <= val ^ T;
                pos_q <= pos_q - 1'b1;
                if (pos_q == IDX_W'(1)) state_q <= S_OUT;
              end
            end
            default: begin   // FMT_RLC
              out_data[rlc_lane[IDX_W-1:0]] <= val ^ T;
              pos_q <= rlc_lane[IDX_W-1:0] + 1'b1;
              if (rlc_lane == (IDX_W+1)'(N - 1)) state_q <= S_OUT;
            end
          endcase
        end
        S_OUT: begin
          if (out_ready) begin
            out_data <= '0;
            hdr_q    <= (FMT != FMT_RLC);
            bw_q     <= '0;
            bmap_q   <= '0;
            pos_q    <= '0;
            if (addr_q >= end_addr) begin
              state_q <= S_IDLE;
              done    <= 1'b1;
            end else begin
              state_q <= S_RD;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: a finished group stays on out_data until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
