// mx_pe: processing engine with LANES SIMD lanes of MXFP4 multiply-accumulate
// using unsigned E5M3 (UE5M3) block scales, and an output stage that turns
// the FP32 results back into FP8 or MXFP4.
//
// Datapath: every cycle with in_valid one activation block (N FP4 elements,
// one scale) is broadcast to all lanes, and each lane receives its own
// weight block (N FP4 elements, one scale). Lane l accumulates
//     psum[l] <- (first ? psum_in[l] : psum[l]) + s_a * s_w[l] * dot(a, w[l])
// in FP32 (see mx_mac_lane). psum_in / psum_out are the partial sums that a
// systolic array passes from PE to PE; psum_valid marks psum_out, two cycles
// after the beat that produced it.
//
// Output stage, for the beat marked last, one cycle after psum_valid
// (out_valid):
//   out_fmt = FMT_E4M3 or FMT_E5M2: each lane result is cast to signed FP8
//             (fp8_out), the standard FP8 quantization path.
//   out_fmt = FMT_UE5M3: the LANES results form one block that is
//             requantized to MXFP4 (mx_scale, mx_elem) for the next layer.
// Both results are produced for every last beat; out_fmt selects which
// fp8_out carries (the MXFP4 result is always UE5M3-scaled). Using the
// LANES lane results as one quantization block (so LANES = block size 8) is
// this design's choice.
//
// The eight lanes, the UE5M3 scales and the requantization of output
// activations follow the paper; the interface, the broadcast of activations
// and the output stage's timing are this design's choices.
//
// Parameters: LANES = 8 SIMD lanes, N = 8 elements per block, EB = 5 scale
// exponent bits (EB = 4 gives the UE4M3 baseline datapath; the requantizer
// always produces UE5M3).
module mx_pe
  import mx_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned N     = 8,
  parameter int unsigned EB    = 5
) (
  input  logic           clk,
  input  logic           rst_n,
  // input beat
  input  logic           in_valid,
  input  logic           first,
  input  logic           last,
  input  fp4_t           act [N],
  input  logic [EB+2:0]  act_scale,
  input  fp4_t           wgt [LANES][N],
  input  logic [EB+2:0]  wgt_scale [LANES],
  // inter-PE partial sums
  input  fp32_t          psum_in [LANES],
  output logic           psum_valid,
  output fp32_t          psum_out [LANES],
  // output stage
  input  fp8_fmt_e       out_fmt,
  output logic           out_valid,
  output fp8_t           fp8_out [LANES],
  output fp8_t           mx_scale,
  output fp4_t           mx_elem [LANES]
);

  logic lane_valid [LANES];
  logic lane_last  [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mx_mac_lane #(.N(N), .EB(EB)) u_lane (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .first     (first),
      .last      (last),
      .act       (act),
      .act_scale (act_scale),
      .wgt       (wgt[l]),
      .wgt_scale (wgt_scale[l]),
      .psum_in   (psum_in[l]),
      .out_valid (lane_valid[l]),
      .out_last  (lane_last[l]),
      .psum_out  (psum_out[l])
    );
  end

  // All lanes run in lockstep; lane 0 speaks for them.
  assign psum_valid = lane_valid[0];

  // ---------------------------------------------------- FP8 output casting
  fp8_t cast [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_cast
    fp8_cast u_cast (
      .x   (psum_out[l]),
      .fmt (out_fmt),
      .y   (cast[l])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) fp8_out[l] <= '0;
    end else if (lane_last[0]) begin
      for (int l = 0; l < LANES; l++) fp8_out[l] <= cast[l];
    end
  end

  // ------------------------------------------------ MXFP4 requantization
  logic q_valid;
  mx_block_quantizer #(.N(LANES)) u_quant (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (lane_last[0]),
    .x         (psum_out),
    .out_valid (q_valid),
    .scale     (mx_scale),
    .elem      (mx_elem)
  );

  assign out_valid = q_valid;

endmodule
