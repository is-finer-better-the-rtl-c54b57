// mx_mac_lane: MXFP4 multiply-accumulate engine of one SIMD lane.
//
// Each accepted beat carries one block of N FP4 E2M1 activations with its
// scale and one block of N FP4 E2M1 weights with its scale (unsigned FP8
// with EB exponent bits and 3 mantissa bits, UE5M3 by default). The lane
// computes
//     psum <- base + s_a * s_w * sum_i(a_i * w_i)
// where base is the incoming inter-PE partial sum psum_in when first is set,
// and the lane's own running partial sum otherwise.
//
// Pipeline (two stages, one block per cycle):
//   stage 1  fp4_dot forms the exact n-way FP4 partial product; in parallel
//            scale_multiplier adds the scale exponents (EB -> EB+1 bits) and
//            multiplies the scale significands (4x4 bits). The partial
//            product is then multiplied by the significand product, which
//            stays exact. Results are registered.
//   stage 2  psum_adder aligns the product against the FP32 partial sum
//            (8-bit exponent), adds, normalizes and rounds once; the result
//            is registered as psum_out.
// out_valid rises two cycles after in_valid; `first` and `last` travel with
// the beat (last is only carried, for the output stage of the PE).
// The order of operations follows the paper's scale-processing diagram; the
// pipeline split and the first/last controls are this design's choices.
// A beat with a zero scale adds nothing (its products are all zero).
module mx_mac_lane
  import mx_pkg::*;
#(
  parameter int unsigned N  = 8,
  parameter int unsigned EB = 5
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           first,
  input  logic           last,
  input  fp4_t           act [N],
  input  logic [EB+2:0]  act_scale,
  input  fp4_t           wgt [N],
  input  logic [EB+2:0]  wgt_scale,
  input  fp32_t          psum_in,
  output logic           out_valid,
  output logic           out_last,
  output fp32_t          psum_out
);

  localparam int unsigned MB   = 3;
  localparam int unsigned DW   = $clog2(144 * N + 1) + 1;
  localparam int unsigned PW   = DW - 1 + 2 * MB + 2;
  localparam int          BIAS = 2 ** (EB - 1) - 1;

  // ---------------------------------------------------------------- stage 1
  logic signed [DW-1:0] dot;
  logic [EB:0]          esum;
  logic [2*MB+1:0]      msig;
  logic                 szero;

  fp4_dot #(.N(N)) u_dot (
    .a   (act),
    .w   (wgt),
    .dot (dot)
  );

  scale_multiplier #(.EB(EB), .MB(MB)) u_smul (
    .sa   (act_scale),
    .sw   (wgt_scale),
    .esum (esum),
    .msig (msig),
    .zero (szero)
  );

  logic [DW-2:0] dot_mag;
  assign dot_mag = (DW-1)'(dot[DW-1] ? -dot : dot);

  logic              s1_valid, s1_first, s1_last, s1_neg;
  logic [PW-1:0]     s1_mag;
  logic signed [9:0] s1_exp;
  fp32_t             s1_psum_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_first   <= 1'b0;
      s1_last    <= 1'b0;
      s1_neg     <= 1'b0;
      s1_mag     <= '0;
      s1_exp     <= '0;
      s1_psum_in <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_first   <= first;
        s1_last    <= last;
        s1_neg     <= dot[DW-1];
        s1_mag     <= szero ? '0 : PW'(dot_mag) * PW'(msig);
        // value of the product LSB: 2^(esum - 2*bias - 2*MB) for the scales,
        // 2^-2 for the two FP4 factors kept in units of 1/2
        s1_exp     <= 10'(int'(esum) - 2 * BIAS - 2 * int'(MB) - 2);
        s1_psum_in <= psum_in;
      end
    end
  end

  // ---------------------------------------------------------------- stage 2
  fp32_t base, sum;
  assign base = s1_first ? s1_psum_in : psum_out;

  psum_adder #(.PW(PW)) u_add (
    .psum     (base),
    .prod_mag (s1_mag),
    .prod_neg (s1_neg),
    .prod_exp (s1_exp),
    .sum      (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      psum_out  <= '0;
    end else begin
      out_valid <= s1_valid;
      out_last  <= s1_valid & s1_last;
      if (s1_valid) psum_out <= sum;
    end
  end

endmodule
