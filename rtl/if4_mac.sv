// if4_mac: IF4 block multiply-accumulate unit, the top of this design.
//
// Every cycle it can take one block of BLOCK_SIZE 4-bit weights and
// BLOCK_SIZE 4-bit activations with their two E4M3 scale factors. The sign bit
// of each scale factor is the block's indicator (0 = FP4, 1 = INT4 scaled by
// 6/7). The element path runs in BLOCK_SIZE parallel if4_lane units: decode,
// an exact FP16 product, scaling by the block scale, and an FP32 accumulator
// per lane. The scale path runs once per block: scale_mult multiplies the two
// scale magnitudes into an FP32 unified scale, and int4_align corrects it for
// INT4 blocks (x1, x6/7 or x36/49). The aligned scale is broadcast to all
// lanes. final_adder sums the lane accumulators into the result.
//
// Timing: two pipeline stages. A block presented with in_valid in cycle t is
// in the accumulators, and so in result, after the clock edge that ends cycle
// t+1; out_valid is high in the cycle after that edge. One block per cycle, no
// stalls. in_clr with a block makes that block start a new accumulation; in_clr
// without in_valid just zeroes the accumulators. rst_n clears everything
// asynchronously. result is combinational from the accumulators.
//
// Block size 16, the parallel scale path, the three-way range alignment and
// FP32 accumulation follow the published IF4 MAC; the handshake, the pipeline
// register placement, rounding (nearest even, subnormals flushed) and the
// summation order of the final adder are this design's choices.
module if4_mac
  import if4_pkg::*;
#(
  parameter int BLOCK_SIZE = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_clr,
  input  logic [BLOCK_SIZE-1:0][3:0] w_codes,
  input  logic [BLOCK_SIZE-1:0][3:0] a_codes,
  input  if4_scale_t                 w_scale,
  input  if4_scale_t                 a_scale,
  output logic                       out_valid,
  output fp32_t                      result
);
  fp32_t s_unified, s_aligned, s_aligned_q;
  logic  s1_valid, s1_clr;
  fp32_t lane_acc [BLOCK_SIZE];

  // Scale path (stage 1)
  scale_mult u_smul  (.sw(w_scale), .sa(a_scale), .s_fp32(s_unified));
  int4_align u_align (.s_in(s_unified), .ind_w(w_scale.ind), .ind_a(a_scale.ind),
                      .s_out(s_aligned));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s_aligned_q <= FP32_ZERO;
      s1_valid    <= 1'b0;
      s1_clr      <= 1'b0;
      out_valid   <= 1'b0;
    end else begin
      if (in_valid) s_aligned_q <= s_aligned;
      s1_valid  <= in_valid;
      s1_clr    <= in_clr;
      out_valid <= s1_valid;
    end

  // Element lanes (stage 1 and stage 2)
  for (genvar i = 0; i < BLOCK_SIZE; i++) begin : g_lane
    if4_lane u_lane (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .w_code   (w_codes[i]),
      .a_code   (a_codes[i]),
      .ind_w    (w_scale.ind),
      .ind_a    (a_scale.ind),
      .s1_valid (s1_valid),
      .s1_clr   (s1_clr),
      .scale    (s_aligned_q),
      .acc      (lane_acc[i])
    );
  end

  final_adder #(.N(BLOCK_SIZE)) u_sum (.x(lane_acc), .sum(result));

  // A valid block always reaches the accumulators one cycle later.
  a_pipe : assert property (@(posedge clk) disable iff (!rst_n) in_valid |=> s1_valid);
endmodule
