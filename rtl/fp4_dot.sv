// fp4_dot: the n-way FP4 partial product of the MXFP4 MAC engine.
//
// Multiplies N FP4 E2M1 activation elements by N FP4 E2M1 weight elements
// and sums the N products. Every FP4 value is a multiple of 1/2 no larger
// than 6, so each product is an exact multiple of 1/4 no larger than 36 and
// the sum is exact: dot = sum(a_i * w_i) * 4, a signed integer. No rounding
// happens here; the block scales are applied afterwards.
//
// The n-way FP4 partial product is the paper's; forming it exactly as an
// integer sum and making n equal to the block size are this design's choices.
//
// Interface: purely combinational. N is the block size (default 8, the block
// size of the main results); DW is the width of the exact sum.
module fp4_dot
  import mx_pkg::*;
#(
  parameter  int unsigned N  = 8,
  localparam int unsigned DW = $clog2(144 * N + 1) + 1
) (
  input  fp4_t                 a [N],
  input  fp4_t                 w [N],
  output logic signed [DW-1:0] dot
);

  always_comb begin
    logic signed [DW-1:0] acc;
    logic signed [9:0]    p;
    acc = '0;
    for (int i = 0; i < N; i++) begin
      // |a|*2 and |w|*2 are at most 12, so the product fits in 8 bits.
      p   = signed'({2'b00, 8'(fp4_mag_x2(a[i][2:0])) * 8'(fp4_mag_x2(w[i][2:0]))});
      acc = (a[i][3] ^ w[i][3]) ? acc - DW'(p) : acc + DW'(p);
    end
    dot = acc;
  end

endmodule
