// mac_unit: one multiply-and-accumulate lane of the accelerator array.
//
// Each accepted beat multiplies the broadcast activation by this lane's
// weight (both signed fixed point with FRAC fraction bits) and adds the
// product to an ACC_W-bit accumulator. The beat flagged in_last closes the
// sum: the accumulator plus the last product is shifted right by FRAC,
// saturated to H bits and held in res until the consumer takes it
// (res_valid/res_ready). The accumulator is then cleared for the next output.
//
// Timing: one beat per cycle; res_valid rises the cycle after the last beat.
// in_ready falls only while an untaken result blocks the output register.
// The paper names the MAC units but not their insides; the fixed-point
// format, the saturation and the handshake are this design's choices.
module mac_unit #(
  parameter int unsigned H     = 16,
  parameter int unsigned FRAC  = 8,
  parameter int unsigned ACC_W = 40
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic                in_last,
  input  logic signed [H-1:0] in_act,
  input  logic signed [H-1:0] in_weight,
  output logic                res_valid,
  input  logic                res_ready,
  output logic signed [H-1:0] res
);

  logic signed [2*H-1:0]  prod;
  logic signed [ACC_W-1:0] acc_q, sum;
  logic signed [ACC_W-1:0] shifted;
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (H-1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(64'sd1 <<< (H-1));

  assign in_ready = !res_valid || res_ready;
  assign prod     = in_act * in_weight;
  assign sum      = acc_q + ACC_W'(prod);
  assign shifted  = sum >>> FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_last) begin
          acc_q     <= '0;
          res_valid <= 1'b1;
          if (shifted > MAXV)      res <= MAXV[H-1:0];
          else if (shifted < MINV) res <= MINV[H-1:0];
          else                     res <= shifted[H-1:0];
        end else begin
          acc_q <= sum;
        end
      end
    end
  end

  // Handshake rule: an untaken result is held unchanged.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (res_valid && !res_ready) |=> (res_valid && $stable(res));
  endproperty
  a_hold: assert property (p_hold);

endmodule
