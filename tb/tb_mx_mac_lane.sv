// tb_mx_mac_lane: runs random chains of MXFP4 blocks through one lane and
// checks every partial sum against a reference that decodes the FP4
// elements and UE5M3 scales to double, forms s_a * s_w * dot (exact in
// double) and rounds base + product once to FP32. Chains start from a
// random incoming partial sum (first = 1) and continue on the lane's own
// sum; beats come back to back or with gaps. The two-cycle latency is
// checked on every beat: each result must appear exactly two cycles after
// its beat. Scales include zero and subnormal codes. A second lane built
// with EB = 4 (UE4M3 scales) gets the same elements and 7-bit scale codes
// and is checked the same way.
module tb_mx_mac_lane;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int unsigned N = 8;

  int checks = 0, failures = 0, cycle = 0;
  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, first = 1'b0, last = 1'b0;
  fp4_t  act [N], wgt [N];
  fp8_t  act_scale = '0, wgt_scale = '0;
  fp32_t psum_in = '0;
  logic  out_valid, out_last;
  fp32_t psum_out;

  mx_mac_lane #(.N(N), .EB(5)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
    .act(act), .act_scale(act_scale), .wgt(wgt), .wgt_scale(wgt_scale),
    .psum_in(psum_in), .out_valid(out_valid), .out_last(out_last), .psum_out(psum_out));

  logic [6:0] act_scale4 = '0, wgt_scale4 = '0;
  logic  out_valid4, out_last4;
  fp32_t psum_out4;

  mx_mac_lane #(.N(N), .EB(4)) dut4 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
    .act(act), .act_scale(act_scale4), .wgt(wgt), .wgt_scale(wgt_scale4),
    .psum_in(psum_in), .out_valid(out_valid4), .out_last(out_last4), .psum_out(psum_out4));

  fp32_t exp_v4 [$];
  fp32_t ref_acc4 = '0;

  always #5 clk = ~clk;

  fp32_t exp_v [$];
  int    exp_c [$];
  logic  exp_l [$];
  fp32_t ref_acc = '0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid4) begin
      fp32_t v;
      checks++;
      v = exp_v4.pop_front();
      if (psum_out4 !== v || out_valid4 !== out_valid) begin
        failures++;
        if (failures < 10) $display("FAIL EB=4 psum_out=%h expected %h", psum_out4, v);
      end
    end
    if (rst_n && out_valid) begin
      checks++;
      if (exp_v.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        fp32_t v;
        int    c;
        logic  l;
        v = exp_v.pop_front();
        c = exp_c.pop_front();
        l = exp_l.pop_front();
        if (psum_out !== v || cycle != c + 2 || out_last != l) begin
          failures++;
          if (failures < 10)
            $display("FAIL psum_out=%h expected %h, cycle %0d expected %0d", psum_out, v, cycle, c + 2);
        end
      end
    end
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp8_t rand_scale();
    int k;
    k = int'($urandom_range(0, 19));
    if (k == 0) return 8'h00;                         // zero scale
    if (k == 1) return 8'($urandom_range(1, 7));      // subnormal
    return 8'($urandom_range(8, 247));
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin act[i] = '0; wgt[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int chain = 0; chain < 400; chain++) begin
      int len;
      len = int'($urandom_range(1, 12));
      for (int b = 0; b < len; b++) begin
        real prod, base, sa;
        int  ctr;
        ctr = int'($urandom_range(0, 7));           // centre of the scale range
        for (int i = 0; i < N; i++) begin act[i] = 4'($urandom); wgt[i] = 4'($urandom); end
        act_scale = rand_scale();
        wgt_scale = rand_scale();
        if (act_scale[7:3] > 5'd8 && wgt_scale[7:3] > 5'd8) act_scale[7:3] = 5'(12 + ctr);
        first     = (b == 0);
        last      = (b == len - 1);
        psum_in   = rand_fp32(-25, 10);
        in_valid  = 1'b1;
        prod = 0.0;
        for (int i = 0; i < N; i++) prod += fp4_to_real(act[i]) * fp4_to_real(wgt[i]);
        sa   = uscale_to_real(act_scale, 5) * uscale_to_real(wgt_scale, 5);
        prod = prod * sa;
        base = first ? fp32_to_real(psum_in) : fp32_to_real(ref_acc);
        ref_acc = real_to_fp32(base + prod);
        if (ref_acc == 32'h80000000) ref_acc = '0;
        exp_v.push_back(ref_acc);
        act_scale4 = 7'($urandom_range(0, 119));
        wgt_scale4 = 7'($urandom_range(0, 119));
        prod = 0.0;
        for (int i = 0; i < N; i++) prod += fp4_to_real(act[i]) * fp4_to_real(wgt[i]);
        prod = prod * uscale_to_real({1'b0, act_scale4}, 4) * uscale_to_real({1'b0, wgt_scale4}, 4);
        base = first ? fp32_to_real(psum_in) : fp32_to_real(ref_acc4);
        ref_acc4 = real_to_fp32(base + prod);
        if (ref_acc4 == 32'h80000000) ref_acc4 = '0;
        exp_v4.push_back(ref_acc4);
        exp_c.push_back(cycle);
        exp_l.push_back(last);
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin       // a gap
          in_valid = 1'b0;
          @(negedge clk);
        end
      end
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_v.size() != 0 || exp_v4.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_v.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
