// tb_narrow_layer: a small linear layer run end to end on the RTL, for
// weight distributions of decreasing width.
//
// For each weight standard deviation sigma_w in {1e-1, 2e-2, 1e-3, 1e-4}
// (activations: sigma 1), FP32 weights W[8][K] and activations x[K],
// K = 128, are drawn from zero-mean normal distributions. Every block of 8
// is quantized to MXFP4 by mx_block_quantizer (checked against the
// reference rounding), and the quantized blocks are then streamed through
// mx_pe, one block per cycle, to form y = W x; each partial sum is checked
// bit-exactly against a double-precision reference. The testbench also
// reports, per sigma_w, how many weight blocks receive a zero UE5M3 scale
// (none may, down to sigma_w = 1e-4), how many would have received a zero
// scale with an FP8 E4M3 scale (smallest value 2^-9), and the relative error
// of y against the unquantized product.
module tb_narrow_layer;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int unsigned LANES = 8;
  localparam int unsigned N     = 8;
  localparam int unsigned K     = 128;
  localparam int unsigned NB    = K / N;
  localparam int          NSIG  = 4;
  localparam real         SIGMA [NSIG] = '{1.0e-1, 2.0e-2, 1.0e-3, 1.0e-4};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // requantizer under test
  logic  q_in_valid = 1'b0, q_out_valid;
  fp32_t qx [N];
  fp8_t  q_scale;
  fp4_t  q_elem [N];
  mx_block_quantizer #(.N(N)) u_quant (
    .clk(clk), .rst_n(rst_n), .in_valid(q_in_valid), .x(qx),
    .out_valid(q_out_valid), .scale(q_scale), .elem(q_elem));

  // processing engine under test
  logic     in_valid = 1'b0, first = 1'b0, last = 1'b0;
  fp4_t     act [N];
  fp8_t     act_scale = '0;
  fp4_t     wgt [LANES][N];
  fp8_t     wgt_scale [LANES];
  fp32_t    psum_in [LANES];
  logic     psum_valid, out_valid;
  fp32_t    psum_out [LANES];
  fp8_t     fp8_out [LANES];
  fp8_t     mx_scale;
  fp4_t     mx_elem [LANES];
  mx_pe u_pe (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
    .act(act), .act_scale(act_scale), .wgt(wgt), .wgt_scale(wgt_scale),
    .psum_in(psum_in), .psum_valid(psum_valid), .psum_out(psum_out),
    .out_fmt(FMT_UE5M3), .out_valid(out_valid), .fp8_out(fp8_out),
    .mx_scale(mx_scale), .mx_elem(mx_elem));

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // Quantize one FP32 block on the RTL and check it.
  task automatic quantize(input fp32_t v [N], output fp8_t s, output fp4_t e [N]);
    real amax, sv;
    amax = 0.0;
    for (int i = 0; i < N; i++) begin
      real a;
      a = fp32_to_real(v[i]);
      if (a < 0.0) a = -a;
      if (a > amax) amax = a;
    end
    qx = v;
    q_in_valid = 1'b1;
    @(negedge clk);
    q_in_valid = 1'b0;
    s = q_scale;
    e = q_elem;
    sv = uscale_to_real(ref_fp8(amax / 6.0, 2), 5);
    checks++;
    if (s !== ref_fp8(amax / 6.0, 2) || !q_out_valid) failures++;
    for (int i = 0; i < N; i++)
      if (e[i] !== ((sv == 0.0) ? 4'd0 : ref_fp4(fp32_to_real(v[i]) / sv))) failures++;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t w32 [LANES][K];
    fp32_t x32 [K];
    fp8_t  ws [LANES][NB], xs [NB];
    fp4_t  we [LANES][NB][N], xe [NB][N];
    for (int i = 0; i < N; i++) begin act[i] = '0; qx[i] = '0; end
    for (int l = 0; l < LANES; l++) begin
      psum_in[l] = '0; wgt_scale[l] = '0;
      for (int i = 0; i < N; i++) wgt[l][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int si = 0; si < NSIG; si++) begin
      int    zero5, zero4;
      real   err2, ref2;
      fp32_t racc [LANES];
      zero5 = 0; zero4 = 0; err2 = 0.0; ref2 = 0.0;
      for (int k = 0; k < K; k++) x32[k] = real_to_fp32(gauss());
      for (int l = 0; l < LANES; l++)
        for (int k = 0; k < K; k++) w32[l][k] = real_to_fp32(SIGMA[si] * gauss());
      // quantize every block on the RTL requantizer
      for (int b = 0; b < NB; b++) begin
        fp32_t v [N];
        fp4_t  e [N];
        for (int i = 0; i < N; i++) v[i] = x32[b * N + i];
        quantize(v, xs[b], e);
        xe[b] = e;
        for (int l = 0; l < LANES; l++) begin
          real amax;
          amax = 0.0;
          for (int i = 0; i < N; i++) begin
            real a;
            v[i] = w32[l][b * N + i];
            a = fp32_to_real(v[i]);
            if (a < 0.0) a = -a;
            if (a > amax) amax = a;
          end
          quantize(v, ws[l][b], e);
          we[l][b] = e;
          if (ws[l][b] == 8'd0) zero5++;
          if (ref_fp8(amax / 6.0, 0) == 8'd0) zero4++;
        end
      end
      // stream the layer through the engine
      for (int b = 0; b < NB; b++) begin
        first     = (b == 0);
        last      = (b == NB - 1);
        act       = xe[b];
        act_scale = xs[b];
        for (int l = 0; l < LANES; l++) begin
          real p;
          wgt[l]       = we[l][b];
          wgt_scale[l] = ws[l][b];
          p = 0.0;
          for (int i = 0; i < N; i++) p += fp4_to_real(xe[b][i]) * fp4_to_real(we[l][b][i]);
          p = p * uscale_to_real(xs[b], 5) * uscale_to_real(ws[l][b], 5);
          racc[l] = real_to_fp32((first ? 0.0 : fp32_to_real(racc[l])) + p);
          if (racc[l] == 32'h80000000) racc[l] = '0;
        end
        in_valid = 1'b1;
        @(negedge clk);
      end
      in_valid = 1'b0;
      @(negedge clk);                       // result of the last beat
      for (int l = 0; l < LANES; l++) begin
        real y;
        checks++;
        if (psum_out[l] !== racc[l]) begin
          failures++;
          $display("FAIL sigma %g lane %0d: %h expected %h", SIGMA[si], l, psum_out[l], racc[l]);
        end
        y = 0.0;
        for (int k = 0; k < K; k++) y += fp32_to_real(w32[l][k]) * fp32_to_real(x32[k]);
        err2 += (fp32_to_real(psum_out[l]) - y) * (fp32_to_real(psum_out[l]) - y);
        ref2 += y * y;
      end
      $display("sigma_w %g: weight blocks %0d, zero UE5M3 scales %0d, zero E4M3 scales %0d, relative error %g",
               SIGMA[si], LANES * NB, zero5, zero4, $sqrt(err2 / ref2));
      checks++;
      if (zero5 != 0 || $sqrt(err2 / ref2) > 0.5) begin
        failures++;
        $display("FAIL narrow weights lost by the UE5M3 scales");
      end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
