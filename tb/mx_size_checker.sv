// mx_size_checker: self-contained random check of one MXFP4 lane and one
// block requantizer built with block size N, used by tb_block_size_sweep.
// The lane gets 300 random chains of blocks; each partial sum is compared
// with double-precision accumulation rounded once to FP32 per block, two
// cycles after its beat. The requantizer gets 300 random FP32 blocks of
// size N; scale and elements are compared with code searches. Counts are
// reported on the ports; done rises when both checks have finished.
module mx_size_checker
  import mx_pkg::*;
  import mx_tb_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);

  int    cycle = 0;
  logic  in_valid = 1'b0, first = 1'b0;
  fp4_t  act [N], wgt [N];
  fp8_t  act_scale = '0, wgt_scale = '0;
  fp32_t psum_in = '0;
  logic  out_valid, out_last;
  fp32_t psum_out;

  logic  q_in_valid = 1'b0, q_out_valid;
  fp32_t qx [N];
  fp8_t  q_scale;
  fp4_t  q_elem [N];

  mx_mac_lane #(.N(N), .EB(5)) u_lane (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(1'b0),
    .act(act), .act_scale(act_scale), .wgt(wgt), .wgt_scale(wgt_scale),
    .psum_in(psum_in), .out_valid(out_valid), .out_last(out_last), .psum_out(psum_out));

  mx_block_quantizer #(.N(N)) u_quant (
    .clk(clk), .rst_n(rst_n), .in_valid(q_in_valid), .x(qx),
    .out_valid(q_out_valid), .scale(q_scale), .elem(q_elem));

  fp32_t exp_v [$];
  int    exp_c [$];
  fp8_t  exp_s [$];
  logic [N-1:0][3:0] exp_e [$];

  always @(posedge clk) cycle <= cycle + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      fp32_t v;
      int    c;
      checks++;
      v = exp_v.pop_front();
      c = exp_c.pop_front();
      if (psum_out !== v || cycle != c + 2) begin
        failures++;
        if (failures < 5) $display("FAIL N=%0d psum %h expected %h", N, psum_out, v);
      end
    end
    if (rst_n && q_out_valid) begin
      fp8_t s;
      logic [N-1:0][3:0] e;
      checks++;
      s = exp_s.pop_front();
      e = exp_e.pop_front();
      if (q_scale !== s) failures++;
      for (int i = 0; i < N; i++) if (q_elem[i] !== e[i]) begin
        failures++;
        if (failures < 5) $display("FAIL N=%0d elem %0d %h expected %h", N, i, q_elem[i], e[i]);
      end
    end
  end

  initial begin
    fp32_t acc;
    checks = 0; failures = 0; done = 1'b0;
    acc = '0;
    for (int i = 0; i < N; i++) begin act[i] = '0; wgt[i] = '0; qx[i] = '0; end
    @(posedge rst_n);
    @(negedge clk);
    // lane
    for (int chain = 0; chain < 60; chain++)
      for (int b = 0; b < 5; b++) begin
        real p;
        for (int i = 0; i < N; i++) begin act[i] = 4'($urandom); wgt[i] = 4'($urandom); end
        act_scale = 8'($urandom_range(0, 247));
        wgt_scale = 8'($urandom_range(0, 247));
        if (act_scale[7:3] + wgt_scale[7:3] > 6'd50) act_scale[7:3] = 5'd10;
        first   = (b == 0);
        psum_in = rand_fp32(-20, 10);
        in_valid = 1'b1;
        p = 0.0;
        for (int i = 0; i < N; i++) p += fp4_to_real(act[i]) * fp4_to_real(wgt[i]);
        p = p * uscale_to_real(act_scale, 5) * uscale_to_real(wgt_scale, 5);
        acc = real_to_fp32((first ? fp32_to_real(psum_in) : fp32_to_real(acc)) + p);
        if (acc == 32'h80000000) acc = '0;
        exp_v.push_back(acc);
        exp_c.push_back(cycle);
        @(negedge clk);
      end
    in_valid = 1'b0;
    // requantizer
    for (int b = 0; b < 300; b++) begin
      int   base;
      real  amax, sv;
      fp8_t s;
      logic [N-1:0][3:0] e;
      base = int'($urandom_range(0, 45)) - 30;
      amax = 0.0;
      for (int i = 0; i < N; i++) begin
        real a;
        qx[i] = rand_fp32(base - int'($urandom_range(0, 8)), base);
        a = fp32_to_real(qx[i]);
        if (a < 0.0) a = -a;
        if (a > amax) amax = a;
      end
      s  = ref_fp8(amax / 6.0, 2);
      sv = uscale_to_real(s, 5);
      for (int i = 0; i < N; i++) e[i] = (sv == 0.0) ? 4'd0 : ref_fp4(fp32_to_real(qx[i]) / sv);
      exp_s.push_back(s);
      exp_e.push_back(e);
      q_in_valid = 1'b1;
      @(negedge clk);
    end
    q_in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_v.size() != 0 || exp_s.size() != 0) failures++;
    done = 1'b1;
  end

endmodule
