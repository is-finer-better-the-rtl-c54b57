// mx_pkg: types, constants and small decode functions shared by the MXFP4
// datapath with UE5M3 block scales.
//
// Number formats used throughout:
//   FP4 E2M1 element  {sign, exp[1:0], man}, exponent bias 1, levels
//                     0, 0.5, 1, 1.5, 2, 3, 4, 6 (largest value 6).
//   FP8 UE5M3 scale   {exp[4:0], man[2:0]}, unsigned, bias 15, with
//                     subnormals: smallest non-zero value 2^-17, largest
//                     value 1.875 * 2^15 (exponent code 31 unused).
//   FP8 E4M3 / E5M2   signed IEEE-style FP8 (all-ones exponent unused),
//                     largest exponents +7 and +15.
//   FP32              IEEE single precision, used for partial sums and for
//                     the activations before requantization.
// Inside the datapath an FP4 magnitude is carried as an integer in units of
// 1/2 (0,1,2,3,4,6,8,12), so every FP4 product is an exact integer in units
// of 1/4.
package mx_pkg;

  typedef enum logic [1:0] {
    FMT_E4M3  = 2'd0,
    FMT_E5M2  = 2'd1,
    FMT_UE5M3 = 2'd2
  } fp8_fmt_e;

  typedef logic [3:0]  fp4_t;
  typedef logic [7:0]  fp8_t;
  typedef logic [31:0] fp32_t;

  // Largest FP4 E2M1 magnitude: the constant C that divides the block
  // absolute maximum when the block scale is formed.
  localparam int unsigned FP4_MAX = 6;

  // Magnitude of an FP4 E2M1 code in units of 1/2.
  function automatic logic [3:0] fp4_mag_x2(input logic [2:0] code);
    unique case (code)
      3'd0: return 4'd0;
      3'd1: return 4'd1;
      3'd2: return 4'd2;
      3'd3: return 4'd3;
      3'd4: return 4'd4;
      3'd5: return 4'd6;
      3'd6: return 4'd8;
      default: return 4'd12;
    endcase
  endfunction

  // Signed value of an FP4 E2M1 element in units of 1/2.
  function automatic logic signed [4:0] fp4_val_x2(input fp4_t e);
    logic signed [4:0] m;
    m = signed'({1'b0, fp4_mag_x2(e[2:0])});
    return e[3] ? -m : m;
  endfunction

endpackage
