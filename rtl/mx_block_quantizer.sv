// mx_block_quantizer: requantizes a block of N FP32 activations into MXFP4,
// that is, one unsigned E5M3 (UE5M3) block scale and N FP4 E2M1 elements.
//
// Following the usual microscaling recipe, the block scale is
// s = Q_UE5M3(x_max / 6), with x_max the largest magnitude in the block and 6
// the largest FP4 value, and each element is q_i = Q_FP4(x_i / s), both with
// round-to-nearest, ties to even.
//   * x_max is found by comparing the FP32 magnitude bits as integers.
//   * x_max / 6 is formed as (significand * 8) / 3 with the exponent lowered
//     by one; the quotient is truncated to 24 bits with the lost bits ORed
//     into its last bit (round to odd), so the single rounding to UE5M3 in
//     fp8_cast (UE5M3 mode) is exact.
//   * x_i / s is never formed. The seven FP4 decision levels
//     {0.25, 0.75, 1.25, 1.75, 2.5, 3.5, 5} * s are computed exactly as
//     (s_significand * {1,3,5,7,10,14,20}) * 2^(s_exponent - 5) and compared
//     with |x_i| as floating-point numbers; the FP4 magnitude code is the
//     number of levels exceeded. At the levels 0.75, 1.75 and 3.5 a tie goes
//     up (to the even codes 2, 4 and 6), at the others it stays down.
//     Magnitudes above 6 * s saturate to 6.
//   * A zero scale (x_max / 6 below half of 2^-17) sets every element to zero.
// Details chosen here: an element that rounds to zero gets sign 0; FP32
// subnormal inputs count as zero.
//
// Interface: x is taken when in_valid is high; scale and elem are registered
// and valid one cycle later with out_valid. One block per cycle.
module mx_block_quantizer
  import mx_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t x [N],
  output logic  out_valid,
  output fp8_t  scale,
  output fp4_t  elem [N]
);

  localparam int unsigned DIV = FP4_MAX / 2;   // x_max / 6 = (x_max / 3) / 2
  localparam int          THR [7] = '{1, 3, 5, 7, 10, 14, 20};

  // ---------------------------------------------------------------- absmax
  logic [30:0] amax;
  always_comb begin
    amax = '0;
    for (int i = 0; i < N; i++)
      if (x[i][30:0] > amax) amax = x[i][30:0];
  end

  // ------------------------------------------------------- x_max / 6 (FP32)
  logic [25:0] quo;
  logic [1:0]  rem;
  fp32_t       sdiv;
  always_comb begin
    int          eout;
    logic [23:0] m;
    quo  = 26'({1'b1, amax[22:0], 3'b000} / 27'(DIV));
    rem  = 2'({1'b1, amax[22:0], 3'b000} % 27'(DIV));
    if (quo[25]) begin
      m    = quo[25:2];
      m[0] = m[0] | quo[1] | quo[0] | (rem != 0);
      eout = int'(amax[30:23]) - 2;
    end else begin
      m    = quo[24:1];
      m[0] = m[0] | quo[0] | (rem != 0);
      eout = int'(amax[30:23]) - 3;
    end
    if (amax[30:23] == 8'd0 || eout <= 0) sdiv = '0;
    else                                  sdiv = {1'b0, 8'(eout), m[22:0]};
  end

  fp8_t s_code;
  fp8_cast u_scale_cast (
    .x   (sdiv),
    .fmt (FMT_UE5M3),
    .y   (s_code)
  );

  // ------------------------------------------------------ element rounding
  // Decision levels as normalized (exponent, 24-bit significand) pairs.
  int          lvl_e [7];
  logic [23:0] lvl_m [7];
  always_comb begin
    logic [3:0] ssig;
    int         sexp, lo;
    logic [8:0] b;
    ssig = {s_code[7:3] != 5'd0, s_code[2:0]};
    sexp = (s_code[7:3] == 5'd0) ? -14 : int'(s_code[7:3]) - 15;
    for (int k = 0; k < 7; k++) begin
      b  = 9'(ssig * 9'(THR[k]));
      lo = 0;
      for (int j = 0; j < 9; j++) if (b[j]) lo = j;
      lvl_e[k] = lo + sexp - 5;              // unbiased exponent of the level
      lvl_m[k] = 24'(b) << (23 - lo);
    end
  end

  fp4_t q [N];
  always_comb begin
    int          xe;
    logic [23:0] xm;
    logic [2:0]  code;
    logic        gt, eq;
    for (int i = 0; i < N; i++) begin
      xe   = int'(x[i][30:23]) - 127;
      xm   = {1'b1, x[i][22:0]};
      code = '0;
      for (int k = 0; k < 7; k++) begin
        gt = (xe > lvl_e[k]) || (xe == lvl_e[k] && xm > lvl_m[k]);
        eq = (xe == lvl_e[k]) && (xm == lvl_m[k]);
        if (gt || (eq && (k == 1 || k == 3 || k == 5))) code = code + 3'd1;
      end
      if (x[i][30:23] == 8'd0 || s_code == '0) code = '0;
      q[i] = {x[i][31] & (code != 3'd0), code};
    end
  end

  // -------------------------------------------------------------- register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      scale     <= '0;
      for (int i = 0; i < N; i++) elem[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        scale <= s_code;
        for (int i = 0; i < N; i++) elem[i] <= q[i];
      end
    end
  end

endmodule
