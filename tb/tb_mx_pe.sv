// tb_mx_pe: end-to-end test of the processing engine at its default size
// (8 lanes, blocks of 8, UE5M3 scales).
//
// Each operation is a set of 8 dot products of length K blocks (K = 1..16):
// one activation vector against 8 weight rows, one row per lane. Beats are
// issued back to back or with gaps; the first beat of an operation adds to
// a random incoming inter-PE partial sum. Every lane's partial sum is
// checked on every beat (two cycles after the beat), and the output stage
// one cycle later: the FP8 cast of each result in the selected format and
// the MXFP4 requantization of the 8 results. The reference decodes every
// operand to double, accumulates with one FP32 rounding per beat, and
// rounds scales and elements by searching the codes. Operand magnitudes are
// spread so that the requantized scale is sometimes zero or subnormal and
// the FP8 casts sometimes saturate. Every such mechanism is counted and
// must occur at least once.
module tb_mx_pe;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int unsigned LANES = 8;
  localparam int unsigned N     = 8;

  int checks = 0, failures = 0, cycle = 0;
  int n_chain_in = 0, n_accum = 0, n_gap = 0, n_fmt [3] = '{0, 0, 0};
  int n_zero_scale = 0, n_sub_scale = 0, n_sat = 0, n_ops = 0;

  logic     clk = 1'b0, rst_n = 1'b0;
  logic     in_valid = 1'b0, first = 1'b0, last = 1'b0;
  fp4_t     act [N];
  fp8_t     act_scale = '0;
  fp4_t     wgt [LANES][N];
  fp8_t     wgt_scale [LANES];
  fp32_t    psum_in [LANES];
  logic     psum_valid, out_valid;
  fp32_t    psum_out [LANES];
  fp8_fmt_e out_fmt = FMT_E4M3;
  fp8_t     fp8_out [LANES];
  fp8_t     mx_scale;
  fp4_t     mx_elem [LANES];

  mx_pe dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
    .act(act), .act_scale(act_scale), .wgt(wgt), .wgt_scale(wgt_scale),
    .psum_in(psum_in), .psum_valid(psum_valid), .psum_out(psum_out),
    .out_fmt(out_fmt), .out_valid(out_valid), .fp8_out(fp8_out),
    .mx_scale(mx_scale), .mx_elem(mx_elem));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef logic [LANES-1:0][31:0] vec_t;
  typedef logic [LANES-1:0][7:0]  f8v_t;
  typedef logic [LANES-1:0][3:0]  f4v_t;

  vec_t  ps_q  [$];
  int    ps_c  [$];
  f8v_t  o8_q  [$];
  fp8_t  os_q  [$];
  f4v_t  oe_q  [$];
  int    o_c   [$];
  vec_t  ref_acc;

  always @(negedge clk) begin
    if (rst_n && psum_valid) begin
      vec_t v;
      int   c;
      checks++;
      if (ps_q.size() == 0) begin
        failures++; $display("FAIL unexpected psum_valid");
      end else begin
        v = ps_q.pop_front();
        c = ps_c.pop_front();
        for (int l = 0; l < LANES; l++)
          if (psum_out[l] !== v[l] || cycle != c + 2) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d psum %h expected %h (cycle %0d/%0d)",
                                        l, psum_out[l], v[l], cycle, c + 2);
          end
      end
    end
    if (rst_n && out_valid) begin
      f8v_t o8;
      f4v_t oe;
      fp8_t os;
      int   c;
      checks++;
      if (o_c.size() == 0) begin
        failures++; $display("FAIL unexpected out_valid");
      end else begin
        o8 = o8_q.pop_front();
        os = os_q.pop_front();
        oe = oe_q.pop_front();
        c  = o_c.pop_front();
        if (cycle != c + 3 || mx_scale !== os) begin
          failures++;
          if (failures < 10) $display("FAIL mx_scale %h expected %h (cycle %0d/%0d)",
                                      mx_scale, os, cycle, c + 3);
        end
        for (int l = 0; l < LANES; l++)
          if (fp8_out[l] !== o8[l] || mx_elem[l] !== oe[l]) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d fp8 %h/%h elem %h/%h", l,
                                        fp8_out[l], o8[l], mx_elem[l], oe[l]);
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

  // scale with exponent field near e (clipped to the finite range)
  function automatic fp8_t scale_near(input int e);
    int ee;
    ee = e + int'($urandom_range(0, 4)) - 2;
    if (ee < 0) ee = 0;
    if (ee > 30) ee = 30;
    return {5'(ee), 3'($urandom)};
  endfunction

  task automatic expect_outputs(input int fmt);
    real   amax, sv;
    fp8_t  s;
    f8v_t  o8;
    f4v_t  oe;
    amax = 0.0;
    for (int l = 0; l < LANES; l++) begin
      real r, a;
      r = fp32_to_real(ref_acc[l]);
      a = (r < 0.0) ? -r : r;
      if (a > amax) amax = a;
      o8[l] = ref_fp8((fmt == 2) ? a : r, fmt);
      if ((fmt == 0 && a > 240.0) || (fmt == 1 && a > 57344.0) || (fmt == 2 && a > 61440.0)) n_sat++;
    end
    s  = ref_fp8(amax / 6.0, 2);
    sv = uscale_to_real(s, 5);
    if (s == 8'd0) n_zero_scale++;
    else if (s[7:3] == 5'd0) n_sub_scale++;
    for (int l = 0; l < LANES; l++)
      oe[l] = (sv == 0.0) ? 4'd0 : ref_fp4(fp32_to_real(ref_acc[l]) / sv);
    o8_q.push_back(o8);
    os_q.push_back(s);
    oe_q.push_back(oe);
    o_c.push_back(cycle);
  endtask

  initial begin
    for (int i = 0; i < N; i++) act[i] = '0;
    for (int l = 0; l < LANES; l++) begin
      psum_in[l] = '0; wgt_scale[l] = '0;
      for (int i = 0; i < N; i++) wgt[l][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int op = 0; op < 300; op++) begin
      int k, ea, ew, fmt;
      k   = int'($urandom_range(1, 16));
      // operand exponent centres: from tiny (zero/subnormal result scales)
      // to large (saturating FP8 casts)
      ea  = int'($urandom_range(0, 30));
      ew  = int'($urandom_range(0, 30));
      if (ea + ew > 46) ew = 46 - ea;
      fmt = op % 3;
      out_fmt = fp8_fmt_e'(fmt);
      n_fmt[fmt]++;
      n_ops++;
      for (int b = 0; b < k; b++) begin
        first     = (b == 0);
        last      = (b == k - 1);
        act_scale = scale_near(ea);
        for (int i = 0; i < N; i++) act[i] = 4'($urandom);
        for (int l = 0; l < LANES; l++) begin
          wgt_scale[l] = scale_near(ew);
          for (int i = 0; i < N; i++) wgt[l][i] = 4'($urandom);
          psum_in[l] = ($urandom_range(0, 1) == 0) ? 32'd0
                     : real_to_fp32(fp32_to_real(rand_fp32(-8, 8)) * pow2(ea + ew - 30));
        end
        if (first && psum_in[0] != 0) n_chain_in++;
        if (!first) n_accum++;
        for (int l = 0; l < LANES; l++) begin
          real p, base;
          p = 0.0;
          for (int i = 0; i < N; i++) p += fp4_to_real(act[i]) * fp4_to_real(wgt[l][i]);
          p = p * uscale_to_real(act_scale, 5) * uscale_to_real(wgt_scale[l], 5);
          base = first ? fp32_to_real(psum_in[l]) : fp32_to_real(ref_acc[l]);
          ref_acc[l] = real_to_fp32(base + p);
          if (ref_acc[l] == 32'h80000000) ref_acc[l] = '0;
        end
        in_valid = 1'b1;
        ps_q.push_back(ref_acc);
        ps_c.push_back(cycle);
        if (last) expect_outputs(fmt);
        @(negedge clk);
        if ($urandom_range(0, 4) == 0) begin
          in_valid = 1'b0;
          n_gap++;
          @(negedge clk);
        end
      end
      // the output format must stay put until the last beat has left
      in_valid = 1'b0;
      repeat (2) @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (ps_q.size() != 0 || o_c.size() != 0) begin
      failures++; $display("FAIL results missing");
    end
    $display("operations %0d, chained psum_in %0d, local accumulations %0d, gaps %0d",
             n_ops, n_chain_in, n_accum, n_gap);
    $display("formats E4M3 %0d E5M2 %0d UE5M3 %0d, zero scales %0d, subnormal scales %0d, saturated casts %0d",
             n_fmt[0], n_fmt[1], n_fmt[2], n_zero_scale, n_sub_scale, n_sat);
    foreach (n_fmt[f]) begin
      checks++;
      if (n_fmt[f] == 0) failures++;
    end
    checks++;
    if (n_chain_in == 0 || n_accum == 0 || n_gap == 0 || n_zero_scale == 0 ||
        n_sub_scale == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
