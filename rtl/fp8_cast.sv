// fp8_cast: FP32 to FP8 conversion, shared by standard FP8 quantization
// (E4M3, E5M2) and by MXFP4 scale generation (unsigned E5M3).
//
// The FP32 exponent is re-biased and clamped to the target range, and the
// 24-bit significand is rounded to the target mantissa width. The UE5M3 mode
// is built from the two existing paths: the 5-bit exponent range of E5M2
// (largest exponent +15) and the 3-bit mantissa rounding of E4M3 (largest
// exponent +7). Its sign bit is given to the exponent, so the sign of the
// input is dropped (scales are formed from absolute values).
//
// The shared caster and its exponent clamps follow the paper.
// Details chosen here: rounding is to nearest, ties to even; values below the
// smallest normal become subnormals (UE5M3 reaches 2^-17, E4M3 2^-9) and
// values below half the smallest subnormal become zero; values above the
// largest finite code, and FP32 Inf/NaN, saturate to the largest finite code
// (exponent field all ones is never produced); FP32 subnormals give zero.
//
// Interface: purely combinational, x -> y, fmt selects the format.
module fp8_cast
  import mx_pkg::*;
(
  input  fp32_t    x,
  input  fp8_fmt_e fmt,
  output fp8_t     y
);

  logic        sgn;
  logic [7:0]  e32;
  logic [23:0] sig;
  int          mb, bias, emax;       // mantissa bits, bias, largest exponent
  int          unb, te, sh;          // unbiased exp, target exp, right shift
  logic [24:0] q, rem_mask;
  logic        rbit, sticky, rup;
  logic [24:0] qr;
  int          efield;
  logic [2:0]  mant;
  logic [4:0]  expo;

  always_comb begin
    sgn = x[31];
    e32 = x[30:23];
    sig = {1'b1, x[22:0]};
    unique case (fmt)
      FMT_E4M3: begin mb = 3; bias = 7;  emax = 7;  end
      FMT_E5M2: begin mb = 2; bias = 15; emax = 15; end
      default:  begin mb = 3; bias = 15; emax = 15; end
    endcase

    unb    = int'(e32) - 127;
    te     = (unb < 1 - bias) ? 1 - bias : unb;
    sh     = 23 - mb + (te - unb);
    q      = '0;
    rbit   = 1'b0;
    sticky = 1'b0;
    if (sh <= 24) begin
      q        = 25'({1'b0, sig} >> sh);
      rbit     = sig[sh-1];
      rem_mask = (25'd1 << (sh - 1)) - 25'd1;
      sticky   = |({1'b0, sig} & rem_mask);
    end else begin
      rem_mask = '0;
    end
    rup = rbit & (sticky | q[0]);
    qr  = q + 25'(rup);

    // qr holds the rounded significand with mb fraction bits.
    efield = 0;
    mant   = '0;
    if (qr[mb+1]) begin                 // rounded up to 2.0
      efield = te + 1 + bias;
      mant   = '0;
    end else if (qr[mb]) begin          // normal
      efield = te + bias;
      mant   = 3'(qr[2:0] & ((3'd1 << mb) - 3'd1));
    end else begin                      // subnormal or zero
      efield = 0;
      mant   = 3'(qr[2:0] & ((3'd1 << mb) - 3'd1));
    end

    if (e32 == 8'd255 || efield > emax + bias) begin   // saturate
      efield = emax + bias;
      mant   = 3'b111;
    end
    if (e32 == 8'd0) begin                             // zero / FP32 subnormal
      efield = 0;
      mant   = '0;
    end
    expo = 5'(efield);

    unique case (fmt)
      FMT_E4M3: y = {sgn, expo[3:0], mant[2:0]};
      FMT_E5M2: y = {sgn, expo[4:0], mant[1:0]};
      default:  y = {expo[4:0], mant[2:0]};
    endcase
  end

endmodule
