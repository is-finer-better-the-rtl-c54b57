// scale_multiplier: product of the activation and weight block scales.
//
// The two unsigned FP8 scales (EB exponent bits, MB mantissa bits) are
// multiplied the way floating-point numbers are: an EB-bit adder sums the
// exponents into an EB+1-bit result, and an (MB+1)x(MB+1)-bit multiplier
// forms the product of the significands (hidden bit included). With the
// default UE5M3 scales this is a 5-bit adder with a 6-bit sum and a 4x4-bit
// multiplier; EB = 4 gives the UE4M3 baseline with the same multiplier.
//
// The scale value is sig * 2^(e - bias - MB) with bias = 2^(EB-1) - 1; a
// subnormal code (e = 0) has hidden bit 0 and takes the exponent of e = 1,
// so the adder is fed max(e, 1). The product value is therefore
// msig * 2^(esum - 2*bias - 2*MB). zero is set when either scale is zero.
//
// The 5-bit exponent adder with 6-bit sum and the shared significand
// multiplier follow the paper; the subnormal handling is this design's.
//
// Interface: purely combinational.
module scale_multiplier #(
  parameter int unsigned EB = 5,
  parameter int unsigned MB = 3
) (
  input  logic [EB+MB-1:0]    sa,
  input  logic [EB+MB-1:0]    sw,
  output logic [EB:0]         esum,
  output logic [2*MB+1:0]     msig,
  output logic                zero
);

  logic [EB-1:0] ea, ew;
  logic [MB:0]   siga, sigw;

  always_comb begin
    ea   = (sa[EB+MB-1:MB] == '0) ? EB'(1) : sa[EB+MB-1:MB];
    ew   = (sw[EB+MB-1:MB] == '0) ? EB'(1) : sw[EB+MB-1:MB];
    siga = {sa[EB+MB-1:MB] != '0, sa[MB-1:0]};
    sigw = {sw[EB+MB-1:MB] != '0, sw[MB-1:0]};
    esum = {1'b0, ea} + {1'b0, ew};
    msig = (2*MB+2)'(siga) * (2*MB+2)'(sigw);
    zero = (sa == '0) || (sw == '0);
  end

endmodule
