// tb_mx_block_quantizer: checks MXFP4 requantization of FP32 blocks against
// a reference built from double arithmetic and code searches:
// scale = nearest UE5M3 to max|x| / 6, element = nearest FP4 to x / scale.
// Stimulus: random blocks of many widths (down to blocks whose scale
// rounds to zero or is subnormal, up to saturating scales), blocks whose
// elements sit exactly on the FP4 decision levels (rounding ties) and on
// the FP4 levels themselves, and back-to-back blocks to check the one-cycle
// latency and one-block-per-cycle rate.
module tb_mx_block_quantizer;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int unsigned N = 8;

  int checks = 0, failures = 0;
  int n_zero_scale = 0, n_sub_scale = 0, n_tie = 0;
  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0;
  fp32_t x [N];
  logic  out_valid;
  fp8_t  scale;
  fp4_t  elem [N];

  mx_block_quantizer #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
                                   .out_valid(out_valid), .scale(scale), .elem(elem));

  always #5 clk = ~clk;

  // expected results, queued in issue order
  fp8_t                exp_s [$];
  logic [N-1:0][3:0]   exp_e [$];

  task automatic push_block();
    real   amax, sv;
    fp8_t  s;
    logic [N-1:0][3:0] e;
    amax = 0.0;
    for (int i = 0; i < N; i++) begin
      real a;
      a = fp32_to_real(x[i]);
      if (a < 0.0) a = -a;
      if (a > amax) amax = a;
    end
    s  = ref_fp8(amax / 6.0, 2);
    sv = uscale_to_real(s, 5);
    if (s == 8'd0) n_zero_scale++;
    else if (s[7:3] == 5'd0) n_sub_scale++;
    for (int i = 0; i < N; i++) e[i] = (sv == 0.0) ? 4'd0 : ref_fp4(fp32_to_real(x[i]) / sv);
    exp_s.push_back(s);
    exp_e.push_back(e);
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      fp8_t s;
      logic [N-1:0][3:0] e;
      checks++;
      if (exp_s.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        s = exp_s.pop_front();
        e = exp_e.pop_front();
        if (scale !== s || elem != '{e[0], e[1], e[2], e[3], e[4], e[5], e[6], e[7]}) begin
          failures++;
          if (failures < 10) begin
            $display("FAIL scale got %h expected %h", scale, s);
            for (int i = 0; i < N; i++) $display("   elem %0d got %h expected %h", i, elem[i], e[i]);
          end
        end
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real thr [7] = '{0.25, 0.75, 1.25, 1.75, 2.5, 3.5, 5.0};
    real lvl [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    int  base;
    for (int i = 0; i < N; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // random blocks of varied width, issued back to back
    for (int b = 0; b < 3000; b++) begin
      base = int'($urandom_range(0, 50)) - 32;
      for (int i = 0; i < N; i++) begin
        x[i] = rand_fp32(base - int'($urandom_range(0, 8)), base);
        if ($urandom_range(0, 15) == 0) x[i] = '0;
      end
      in_valid = 1'b1;
      push_block();
      @(negedge clk);
    end
    // tie blocks: element = T * s for a representable scale s, block max 6s
    for (int b = 0; b < 1000; b++) begin
      real sv;
      logic [7:0] sc;
      sc = 8'($urandom_range(8, 247));          // a normal UE5M3 scale
      sv = uscale_to_real(sc, 5);
      for (int i = 0; i < N; i++) begin
        real t;
        t = ($urandom_range(0, 1) == 0) ? thr[$urandom_range(0, 6)] : lvl[$urandom_range(0, 7)];
        if ($urandom_range(0, 1) == 1) t = -t;
        x[i] = real_to_fp32(t * sv);
      end
      x[$urandom_range(0, N - 1)] = real_to_fp32(6.0 * sv);
      n_tie++;
      in_valid = 1'b1;
      push_block();
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    if (exp_s.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_s.size());
    end
    checks++;
    if (n_zero_scale == 0 || n_sub_scale == 0) begin
      failures++;
      $display("FAIL zero-scale blocks %0d, subnormal-scale blocks %0d", n_zero_scale, n_sub_scale);
    end
    $display("zero-scale blocks %0d, subnormal-scale blocks %0d, tie blocks %0d",
             n_zero_scale, n_sub_scale, n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
