// tb_psum_adder: checks the partial-sum adder against double-precision
// addition rounded once to FP32 (mx_tb_pkg::real_to_fp32). Stimulus: random
// partial sums and products with exponent gaps from 0 to beyond the
// significand width, both signs (so effective subtraction and massive
// cancellation occur), exact cancellation, a zero operand on either side,
// and products that round up across a power of two.
module tb_psum_adder;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int unsigned PW = 19;

  int checks = 0, failures = 0;
  fp32_t             psum, sum;
  logic [PW-1:0]     prod_mag;
  logic              prod_neg;
  logic signed [9:0] prod_exp;

  psum_adder #(.PW(PW)) dut (.psum(psum), .prod_mag(prod_mag), .prod_neg(prod_neg),
                             .prod_exp(prod_exp), .sum(sum));

  task automatic check_one(input fp32_t ps, input logic [PW-1:0] m, input logic ng,
                           input int pe);
    real   pv;
    fp32_t exp_s;
    psum = ps; prod_mag = m; prod_neg = ng; prod_exp = 10'(pe);
    #1;
    pv = real'(m) * pow2(pe);
    if (ng) pv = -pv;
    exp_s = real_to_fp32(fp32_to_real(ps) + pv);
    if (exp_s == 32'h80000000) exp_s = 32'd0;
    checks++;
    if (sum !== exp_s) begin
      failures++;
      if (failures < 10)
        $display("FAIL psum=%h prod=%s%0d*2^%0d got %h expected %h",
                 ps, ng ? "-" : "", m, pe, sum, exp_s);
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
    int pe;
    fp32_t ps;
    check_one(32'd0, '0, 1'b0, -10);                       // 0 + 0
    check_one(32'd0, 19'd12345, 1'b1, -20);                // 0 + p
    check_one(32'h3fc00000, '0, 1'b0, -20);                // s + 0
    check_one(32'h3fc00000, 19'd3, 1'b1, -1);              // 1.5 - 1.5 = 0
    check_one(32'h3f7fffff, 19'd1, 1'b0, -25);             // rounds up to 1.0
    check_one(32'h4b000000, 19'd1, 1'b0, -1);              // tie, stays even
    check_one(32'h4b000001, 19'd1, 1'b0, -1);              // tie, rounds up
    for (int i = 0; i < 20000; i++) begin
      ps = rand_fp32(-20, 20);
      pe = int'($urandom_range(0, 60)) - 50;
      check_one(ps, PW'($urandom), 1'($urandom), pe);
    end
    // near-cancellation: product close to -psum
    for (int i = 0; i < 5000; i++) begin
      logic [PW-1:0] m;
      m  = PW'($urandom) | (PW'(1) << (PW - 1));
      pe = int'($urandom_range(0, 20)) - 30;
      ps = real_to_fp32(real'(m) * pow2(pe) * (1.0 + real'($urandom_range(0, 8) - 4) * pow2(-22)));
      check_one(ps, m, 1'b1, pe);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
