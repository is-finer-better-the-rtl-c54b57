// psum_adder: exponent adjustment, summation and normalization of the MXFP4
// MAC engine.
//
// Adds one scaled block product to an FP32 partial sum and returns the new
// FP32 partial sum. The product arrives as an exact integer magnitude with a
// sign and the exponent of its least significant bit (value =
// prod_neg ? -prod_mag : prod_mag, times 2^prod_exp). It is first normalized
// into FP32 fields without loss (prod_mag has at most 24 bits). The exponent
// adjustment then takes the difference between the 8-bit partial-sum
// exponent and the product exponent and shifts the smaller operand right by
// it, keeping guard, round and sticky bits. The aligned significands are
// added or subtracted, the result is normalized with a leading-zero count and
// rounded once, to nearest with ties to even.
//
// Details chosen here: FP32 subnormal inputs count as zero and results below
// the smallest normal flush to zero; a result above the FP32 range becomes
// Inf; an Inf/NaN partial sum passes through unchanged; an exact
// cancellation gives +0.
//
// The three steps and the 8-bit partial-sum exponent follow the paper; the
// FP32 significand width and the rounding rules are this design's choices.
//
// Interface: purely combinational. PW is the product magnitude width.
module psum_adder
  import mx_pkg::*;
#(
  parameter int unsigned PW = 24
) (
  input  fp32_t              psum,
  input  logic [PW-1:0]      prod_mag,
  input  logic               prod_neg,
  input  logic signed [9:0]  prod_exp,
  output fp32_t              sum
);

  // Position of the leading one of a vector (0 when the vector is zero).
  function automatic int lead_one(input logic [27:0] v);
    int p;
    p = 0;
    for (int i = 0; i < 28; i++) if (v[i]) p = i;
    return p;
  endfunction

  logic        sa, sb, sx, sy;
  int          ea, eb, ex, ey, d, e, l;
  logic [23:0] siga, sigb, sigx, sigy, m24;
  logic [26:0] mx, my, mfull, n;
  logic [27:0] s;
  logic        st, rup;
  logic [24:0] m25;

  always_comb begin
    // --- unpack the partial sum
    sa   = psum[31];
    ea   = int'(psum[30:23]);
    siga = {1'b1, psum[22:0]};

    // --- normalize the product into FP32 fields
    sb   = prod_neg;
    l    = lead_one(28'(prod_mag));
    eb   = l + int'(prod_exp) + 127;
    sigb = 24'(28'(prod_mag) << (23 - l));
    if (prod_mag == '0 || eb <= 0) eb = 0;
    if (eb >= 255) begin eb = 255; sigb = 24'h800000; end

    sum = '0;
    sx = 1'b0; sy = 1'b0; ex = 0; ey = 0; sigx = '0; sigy = '0;
    mx = '0; my = '0; mfull = '0; n = '0; s = '0; st = 1'b0; rup = 1'b0;
    m24 = '0; m25 = '0; d = 0; e = 0;

    if (ea == 255) begin
      sum = psum;
    end else if (eb == 255) begin
      sum = {sb, 8'hff, 23'd0};
    end else if (eb == 0) begin
      sum = (ea == 0) ? 32'd0 : psum;
    end else if (ea == 0) begin
      sum = {sb, 8'(eb), sigb[22:0]};
    end else begin
      // --- exponent adjustment: order by magnitude, align the smaller
      if ({eb[7:0], sigb} > {ea[7:0], siga}) begin
        sx = sb; ex = eb; sigx = sigb; sy = sa; ey = ea; sigy = siga;
      end else begin
        sx = sa; ex = ea; sigx = siga; sy = sb; ey = eb; sigy = sigb;
      end
      d     = ex - ey;
      mx    = {sigx, 3'b000};
      mfull = {sigy, 3'b000};
      if (d >= 27) begin
        my = 27'd1;
      end else begin
        my    = mfull >> d;
        st    = |(mfull & ((27'd1 << d) - 27'd1));
        my[0] = my[0] | st;
      end

      // --- summation and normalization
      e = ex;
      if (sx == sy) begin
        s = {1'b0, mx} + {1'b0, my};
        if (s[27]) begin
          s = {1'b0, s[27:2], s[1] | s[0]};
          e = ex + 1;
        end
      end else begin
        s = {1'b0, mx} - {1'b0, my};
      end

      if (s == '0) begin
        sum = 32'd0;
      end else begin
        l = lead_one(s);
        n = 27'(s << (26 - l));
        e = e - (26 - l);
        // --- round to nearest, ties to even
        m24 = n[26:3];
        rup = n[2] & (n[1] | n[0] | m24[0]);
        m25 = {1'b0, m24} + 25'(rup);
        if (m25[24]) begin
          m25 = m25 >> 1;
          e   = e + 1;
        end
        if (e >= 255)    sum = {sx, 8'hff, 23'd0};
        else if (e <= 0) sum = 32'd0;
        else             sum = {sx, 8'(e), m25[22:0]};
      end
    end
  end

endmodule
