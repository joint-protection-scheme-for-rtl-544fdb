// jp_accel_top: sparsity-aware DNN accelerator datapath with the joint
// hardware-key (Hkey) and model-key (Mkey) protection.
//
// N lanes work in parallel. Each lane is a MAC, a bias adder with its Mkey
// segment MK_i, a modified ReLU that XORs its output with the secret vector T,
// and a match detector driven by the Hkey segment HK_i. All lanes feed one
// compression block, which drops the values whose detector fired and writes
// the rest, with their positions, to the feature-map memory. A decompression
// block reads the memory back, removes T and presents the dense groups that
// the next layer's MACs consume.
//
// Operation: stream K beats on in_* (in_act is broadcast to all lanes, each
// lane has its own weight); the beat with in_last also carries the obfuscated
// biases B'. The cycle after it, the N lane results form one group that the
// compression block takes when it is free. If it is still emitting the
// previous group, the MAC array holds its results and in_ready falls: the
// stall_cycles counter counts these cycles. With a wrong Hkey no value is
// dropped, every group costs more memory words and more cycles, and the
// decompressed data is unchanged. With a wrong Mkey the biases are wrong, so
// the decompressed data is wrong. mem_clear starts a new layer; rd_start walks
// the memory and delivers each group on dec_*.
//
// All MAC lanes see the same handshake, so lane 0's in_ready and res_valid
// stand for the whole array; the other lanes' copies are left unused, as is
// the memory's full flag (overflow is reported instead).
//
// The lane structure, the keys and the secret vector follow the paper's
// overall architecture figure. The memory, the decompression sequencing, the
// handshakes and all widths beyond the 16-bit data are this design's choices.
// The key buses are plain inputs: the tamper-proof key storage is outside.
// HK_LOCK and MK_LOCK (default: every lane locked) leave chosen lanes with a
// plain zero detector or a plain bias adder, the paper's way of shortening
// the keys; the key bits of such lanes are ignored.
module jp_accel_top
  import jp_pkg::*;
#(
  parameter int unsigned  H     = 16,
  parameter int unsigned  N     = 128,
  parameter int unsigned  FRAC  = 8,
  parameter int unsigned  ACC_W = 40,
  parameter int unsigned  C     = 8,
  parameter int unsigned  MKW   = 2,
  parameter int unsigned  MEM_W = 32,
  parameter int unsigned  DEPTH = 4096,
  parameter fmt_e         FMT   = FMT_BITMAP,
  parameter logic [H-1:0] T     = 16'hB4E1,
  parameter logic [N-1:0][C-1:0]   HK_STAR      = (N*C)'(key_pattern(32'd1)),
  parameter logic [N-1:0][MKW-1:0] MK_XNOR_MASK = (N*MKW)'(key_pattern(32'd2)),
  parameter logic [N-1:0]          HK_LOCK      = '1,   // lanes with an Hkey segment
  parameter logic [N-1:0]          MK_LOCK      = '1,   // lanes with an Mkey segment
  parameter int unsigned  AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // keys
  input  logic [N-1:0][C-1:0]   hk,
  input  logic [N-1:0][MKW-1:0] mk,
  // decompressed input data stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic                  in_last,
  input  logic [H-1:0]          in_act,
  input  logic [N-1:0][H-1:0]   in_weight,
  input  logic [N-1:0][H-1:0]   in_bias,     // B', sampled with in_last
  // feature-map memory
  input  logic                  mem_clear,
  output logic [AW:0]           words_stored,
  output logic [31:0]           words_requested,
  output logic                  mem_overflow,
  // statistics
  output logic [31:0]           groups_out,
  output logic [31:0]           zeros_dropped,
  output logic [31:0]           stall_cycles,
  // read-back path (decompressed data for the next layer)
  input  logic                  rd_start,
  output logic                  rd_busy,
  output logic                  rd_done,
  output logic                  dec_valid,
  input  logic                  dec_ready,
  output logic [N-1:0][H-1:0]   dec_data
);

  logic [N-1:0]        mac_in_ready, mac_res_valid;
  logic [N-1:0][H-1:0] mac_res;
  logic [N-1:0][H-1:0] bias_q;
  logic [N-1:0][H-1:0] a_lane, x_mod;
  logic [N-1:0]        is_zero;
  logic                grp_valid, grp_ready;
  logic                cw_valid, cw_last;
  logic [MEM_W-1:0]    cw_word;
  logic                rd_en;
  logic [AW-1:0]       rd_addr;
  logic [MEM_W-1:0]    rd_data;
  logic [31:0]         drop_in_grp;

  assign in_ready  = mac_in_ready[0];
  assign grp_valid = mac_res_valid[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bias_q <= '0;
    else if (in_valid && in_ready && in_last) bias_q <= in_bias;
  end

  for (genvar i = 0; i < int'(N); i++) begin : g_lane
    mac_unit #(.H(H), .FRAC(FRAC), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n,
      .in_valid, .in_ready(mac_in_ready[i]), .in_last,
      .in_act(in_act), .in_weight(in_weight[i]),
      .res_valid(mac_res_valid[i]), .res_ready(grp_ready), .res(mac_res[i])
    );
    bias_adder_mk #(.H(H), .MKW(MKW), .XNOR_MASK(MK_XNOR_MASK[i]), .LOCKED(MK_LOCK[i])) u_add (
      .mac_out(mac_res[i]), .bias_obf(bias_q[i]), .mk(mk[i]), .a(a_lane[i])
    );
    relu_t #(.H(H), .T(T)) u_relu (
      .a(a_lane[i]), .x_mod(x_mod[i])
    );
    match_detector #(.H(H), .C(C), .T(T), .HK_STAR(HK_STAR[i]), .LOCKED(HK_LOCK[i])) u_md (
      .x_mod(x_mod[i]), .hk(hk[i]), .is_zero(is_zero[i])
    );
  end

  compression_block #(.H(H), .N(N), .MEM_W(MEM_W), .FMT(FMT)) u_comp (
    .clk, .rst_n,
    .in_valid(grp_valid), .in_ready(grp_ready),
    .in_data(x_mod), .in_zero(is_zero),
    .out_valid(cw_valid), .out_ready(1'b1),
    .out_word(cw_word), .out_last(cw_last)
  );

  fmap_mem #(.W(MEM_W), .DEPTH(DEPTH), .AW(AW)) u_mem (
    .clk, .rst_n, .clear(mem_clear),
    .wr_valid(cw_valid), .wr_data(cw_word),
    .rd_en, .rd_addr, .rd_data,
    .words_stored, .words_requested, .full(), .overflow(mem_overflow)
  );

  decompression_block #(.H(H), .N(N), .MEM_W(MEM_W), .AW(AW), .FMT(FMT), .T(T)) u_dec (
    .clk, .rst_n, .start(rd_start), .end_addr(words_stored),
    .busy(rd_busy), .done(rd_done),
    .rd_en, .rd_addr, .rd_data,
    .out_valid(dec_valid), .out_ready(dec_ready), .out_data(dec_data)
  );

  always_comb begin
    drop_in_grp = '0;
    for (int i = 0; i < int'(N); i++) drop_in_grp = drop_in_grp + 32'(is_zero[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      groups_out    <= '0;
      zeros_dropped <= '0;
      stall_cycles  <= '0;
    end else begin
      if (cw_valid && cw_last) groups_out <= groups_out + 1;
      if (grp_valid && grp_ready) zeros_dropped <= zeros_dropped + drop_in_grp;
      if (grp_valid && !grp_ready) stall_cycles <= stall_cycles + 1;
    end
  end

endmodule
