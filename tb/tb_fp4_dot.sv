// tb_fp4_dot: checks the n-way FP4 partial product against a real-valued
// sum of the decoded FP4 products (times 4), for random blocks, all-maximum
// blocks of both signs and single-element blocks that walk every code pair.
module tb_fp4_dot;
  import mx_pkg::*;
  import mx_tb_pkg::*;
  localparam int unsigned N  = 8;
  localparam int unsigned DW = $clog2(144 * N + 1) + 1;

  int checks = 0, failures = 0;
  fp4_t a [N], w [N];
  logic signed [DW-1:0] dot;

  fp4_dot #(.N(N)) dut (.a(a), .w(w), .dot(dot));

  task automatic check_now();
    real ref_sum;
    #1;
    ref_sum = 0.0;
    for (int i = 0; i < N; i++) ref_sum += fp4_to_real(a[i]) * fp4_to_real(w[i]);
    checks++;
    if (real'(dot) != ref_sum * 4.0) begin
      failures++;
      if (failures < 10) $display("FAIL dot=%0d expected %g", dot, ref_sum * 4.0);
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
    for (int i = 0; i < N; i++) begin a[i] = 4'h7; w[i] = 4'h7; end
    check_now();                                   // +6*6*N
    for (int i = 0; i < N; i++) w[i] = 4'hf;
    check_now();                                   // -6*6*N
    for (int ca = 0; ca < 16; ca++)
      for (int cw = 0; cw < 16; cw++) begin
        for (int i = 0; i < N; i++) begin a[i] = '0; w[i] = '0; end
        a[ca % N] = 4'(ca); w[ca % N] = 4'(cw);
        check_now();
      end
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < N; i++) begin a[i] = 4'($urandom); w[i] = 4'($urandom); end
      check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
