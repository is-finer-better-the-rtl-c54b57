// tb_scale_multiplier: walks every pair of UE5M3 scale codes (and a sample
// of UE4M3 pairs with EB = 4) and checks that
// msig * 2^(esum - 2*bias - 6) equals the product of the decoded scales,
// and that zero is raised exactly when one scale is zero.
module tb_scale_multiplier;
  import mx_tb_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0] sa, sw;
  logic [5:0] esum;
  logic [7:0] msig;
  logic       zero;
  logic [6:0] sa4, sw4;
  logic [4:0] esum4;
  logic [7:0] msig4;
  logic       zero4;

  scale_multiplier #(.EB(5), .MB(3)) dut  (.sa(sa),  .sw(sw),  .esum(esum),  .msig(msig),  .zero(zero));
  scale_multiplier #(.EB(4), .MB(3)) dut4 (.sa(sa4), .sw(sw4), .esum(esum4), .msig(msig4), .zero(zero4));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p, r;
    for (int i = 0; i < 248; i++)
      for (int j = 0; j < 248; j++) begin
        sa = 8'(i); sw = 8'(j);
        sa4 = 7'($urandom_range(0, 119)); sw4 = 7'($urandom_range(0, 119));
        #1;
        p = uscale_to_real(sa, 5) * uscale_to_real(sw, 5);
        r = real'(msig) * pow2(int'(esum) - 30 - 6);
        checks++;
        if (p != r || zero != (p == 0.0)) begin
          failures++;
          if (failures < 10) $display("FAIL sa=%h sw=%h got %g expected %g", sa, sw, r, p);
        end
        p = uscale_to_real({1'b0, sa4}, 4) * uscale_to_real({1'b0, sw4}, 4);
        r = real'(msig4) * pow2(int'(esum4) - 14 - 6);
        checks++;
        if (p != r || zero4 != (p == 0.0)) begin
          failures++;
          if (failures < 10) $display("FAIL4 sa=%h sw=%h got %g expected %g", sa4, sw4, r, p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
