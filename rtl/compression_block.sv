// compression_block: packs one output group of N lane values into memory words,
// dropping the values the match detectors flag.
//
// A group is the N values X'_0..X'_{N-1} produced in the same cycle by the N
// lanes, with one is_zero flag per lane. Lanes whose flag is '0' are kept.
// The block registers the group and then emits one MEM_W-bit word per cycle
// (out_valid/out_ready), with out_last on the group's final word. Stored
// values stay in X' form (still XORed with T). Word formats, with the value in
// bits [H-1:0] and a metadata field above it:
//   FMT_BITMAP: ceil(N/MEM_W) bitmap words (bit i = lane i kept), then one
//               word per kept value, in lane order.
//   FMT_RLC:    one {run, value} word per kept value, run = number of dropped
//               lanes since the previous word. If the group ends in dropped
//               lanes, a closing word {run, X'_{N-1}} covers them (lane N-1 is
//               then a dropped zero, stored as T).
//   FMT_CSC:    one count word (number of kept values), then one
//               {row index, value} word per kept value.
// A priority encoder finds the next kept lane, so a group costs one cycle per
// word: the more values are kept, the longer the group takes. in_ready is
// high when idle and in the cycle the final word is taken.
//
// The paper names CSC, RLC and BitMap compression and states only that zeros
// are discarded and non-zeros stored with their positions; the word layouts
// here are this design's own.
module compression_block
  import jp_pkg::*;
#(
  parameter int unsigned H     = 16,
  parameter int unsigned N     = 128,
  parameter int unsigned MEM_W = 32,
  parameter fmt_e        FMT   = FMT_BITMAP
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [N-1:0][H-1:0]   in_data,   // X' of every lane
  input  logic [N-1:0]          in_zero,   // match detector outputs
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [MEM_W-1:0]      out_word,
  output logic                  out_last
);

  localparam int unsigned META_W = MEM_W - H;
  localparam int unsigned NBW    = (N + MEM_W - 1) / MEM_W;   // bitmap words
  localparam int unsigned BW_W   = (NBW > 1) ? $clog2(NBW) : 1;
  localparam int unsigned IDX_W  = $clog2(N + 1);
  localparam int unsigned LIDX_W = (N > 1) ? $clog2(N) : 1;    // lane index

  typedef enum logic [1:0] {S_IDLE, S_BMAP, S_HDR, S_DATA} state_e;

  state_e                 state_q;
  logic [N-1:0][H-1:0]    vals_q;
  logic [N-1:0]           keep_q;         // kept lanes not yet emitted
  logic [NBW*MEM_W-1:0]   bmap_q;         // bitmap of the whole group
  logic [BW_W-1:0]        bw_q;
  logic [IDX_W-1:0]       pos_q;          // RLC: next lane not yet covered

  logic                   ff_found;
  logic [IDX_W-1:0]       ff_idx;
  logic [N-1:0]           keep_rest;      // keep_q with ff_idx cleared
  logic [IDX_W-1:0]       kept_cnt;
  logic                   take_out, take_in;
  logic [N-1:0]           keep_in;

  assign keep_in = ~in_zero;

  // Lowest kept lane still to be emitted.
  always_comb begin
    ff_found = 1'b0;
    ff_idx   = '0;
    for (int i = int'(N) - 1; i >= 0; i--) begin
      if (keep_q[i]) begin
        ff_found = 1'b1;
        ff_idx   = IDX_W'(i);
      end
    end
    keep_rest = keep_q;
    if (ff_found) keep_rest[ff_idx[LIDX_W-1:0]] = 1'b0;
  end

  always_comb begin
    kept_cnt = '0;
    for (int i = 0; i < int'(N); i++) kept_cnt = kept_cnt + IDX_W'(keep_q[i]);
  end

  // Output word of the current state.
  always_comb begin
    out_valid = (state_q != S_IDLE);
    out_word  = '0;
    out_last  = 1'b0;
    unique case (state_q)
      S_BMAP: begin
        out_word = bmap_q[bw_q*MEM_W +: MEM_W];
        out_last = (32'(bw_q) == NBW - 1) && (keep_q == '0);
      end
      S_HDR: begin
        out_word = MEM_W'(kept_cnt);
        out_last = (keep_q == '0);
      end
      S_DATA: begin
        if (FMT == FMT_RLC) begin
          if (ff_found) begin
            out_word = {META_W'(ff_idx - pos_q), vals_q[ff_idx[LIDX_W-1:0]]};
            out_last = (32'(ff_idx) == N - 1);
          end else begin
            out_word = {META_W'(IDX_W'(N - 1) - pos_q), vals_q[N-1]};
            out_last = 1'b1;
          end
        end else if (FMT == FMT_CSC) begin
          out_word = {META_W'(ff_idx), vals_q[ff_idx[LIDX_W-1:0]]};
          out_last = (keep_rest == '0);
        end else begin
          out_word = {{META_W{1'b0}}, vals_q[ff_idx[LIDX_W-1:0]]};
          out_last = (keep_rest == '0);
        end
      end
      default: ;
    endcase
  end

  assign take_out = out_valid && out_ready;
  assign in_ready = (state_q == S_IDLE) || (take_out && out_last);
  assign take_in  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      vals_q  <= '0;
      keep_q  <= '0;
      bmap_q  <= '0;
      bw_q    <= '0;
      pos_q   <= '0;
    end else begin
      if (take_out) begin
        unique case (state_q)
          S_BMAP: begin
            if (32'(bw_q) == NBW - 1) state_q <= (keep_q == '0) ? S_IDLE : S_DATA;
            else                      bw_q    <= bw_q + 1'b1;
          end
          S_HDR: state_q <= (keep_q == '0) ? S_IDLE : S_DATA;
          S_DATA: begin
            keep_q <= keep_rest;
            if (FMT == FMT_RLC) pos_q <= ff_found ? ff_idx + 1'b1 : IDX_W'(N);
            if (out_last) state_q <= S_IDLE;
          end
          default: ;
        endcase
      end
      if (take_in) begin
        vals_q  <= in_data;
        keep_q  <= keep_in;
        bmap_q  <= (NBW*MEM_W)'(keep_in);
        bw_q    <= '0;
        pos_q   <= '0;
        unique case (FMT)
          FMT_BITMAP: state_q <= S_BMAP;
          FMT_CSC:    state_q <= S_HDR;
          default:    state_q <= S_DATA;
        endcase
      end
    end
  end

  // Handshake rule: a word offered to memory stays stable until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_word) && $stable(out_last));
  endproperty
  a_hold: assert property (p_hold);

endmodule
