// tb_fp8_cast: checks the FP32 -> FP8 caster in all three formats against a
// nearest-code search (mx_tb_pkg::ref_fp8). Stimulus: random FP32 values
// spanning each format's subnormal, normal and overflow ranges, exact
// rounding ties, zero, the largest finite codes and Inf.
module tb_fp8_cast;
  import mx_pkg::*;
  import mx_tb_pkg::*;

  int checks = 0, failures = 0;
  fp32_t    x;
  fp8_fmt_e fmt;
  fp8_t     y;

  fp8_cast dut (.x(x), .fmt(fmt), .y(y));

  task automatic check_one(input fp32_t xv, input fp8_fmt_e f);
    fp8_t exp_y;
    real  r;
    x   = xv;
    fmt = f;
    #1;
    r = fp32_to_real(xv);
    if (xv[30:23] == 8'hff) r = xv[31] ? -1.0e6 : 1.0e6;
    if (f == FMT_UE5M3 && r < 0.0) r = -r;
    exp_y = ref_fp8(r, int'(f));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL fmt=%0d x=%h (%g) got %h expected %h", f, xv, r, y, exp_y);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp8_fmt_e fs [3] = '{FMT_E4M3, FMT_E5M2, FMT_UE5M3};
    foreach (fs[k]) begin
      check_one(32'h00000000, fs[k]);
      check_one(32'h7f800000, fs[k]);                 // +Inf saturates
      check_one(32'h3f880000, fs[k]);                 // 1.0625: tie, even down
      check_one(32'h3f980000, fs[k]);                 // 1.1875: tie, even up
      check_one(32'h47700000, fs[k]);                 // 61440 = UE5M3 max
      check_one(32'h43700000, fs[k]);                 // 240 = E4M3 max
      check_one(32'h37000000, fs[k]);                 // 2^-17 = UE5M3 min
      check_one(32'h36800000, fs[k]);                 // 2^-18: tie to zero
      check_one(32'h36800001, fs[k]);                 // just above: min
      check_one(32'h3b000000, fs[k]);                 // 2^-9 = E4M3 min
      for (int i = 0; i < 3000; i++) check_one(rand_fp32(-26, 18), fs[k]);
      // values with few mantissa bits, so ties are frequent
      for (int i = 0; i < 1000; i++)
        check_one({1'($urandom), 8'(127 + $urandom_range(0, 40) - 22),
                   4'($urandom), 19'd0}, fs[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
