// tb_block_size_sweep: the block-size sweep. Builds the MXFP4 lane and the
// block requantizer at every block size evaluated for MXFP4 with UE5M3
// scales (2, 4, 8, 16, 32, 64, 128, 256) and runs mx_size_checker on each,
// so that the exactness of the FP4 partial product and of the scale and
// element rounding is shown at every size, not only at the default 8.
module tb_block_size_sweep;
  localparam int NS = 8;
  localparam int SIZES [NS] = '{2, 4, 8, 16, 32, 64, 128, 256};

  logic clk = 1'b0, rst_n = 1'b0;
  int   c [NS], f [NS];
  logic d [NS];

  always #5 clk = ~clk;

  for (genvar k = 0; k < NS; k++) begin : g_size
    mx_size_checker #(.N(SIZES[k])) u_chk (
      .clk(clk), .rst_n(rst_n), .checks(c[k]), .failures(f[k]), .done(d[k]));
  end

  initial begin
    int checks, failures;
    fork
      begin
        repeat (200000) @(posedge clk);
        checks = 0; failures = 1;
        foreach (c[k]) begin checks += c[k]; failures += f[k]; end
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    join_none
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5] && d[6] && d[7]);
    @(posedge clk);
    checks = 0; failures = 0;
    foreach (c[k]) begin
      $display("block size %0d: checks %0d failures %0d", SIZES[k], c[k], f[k]);
      checks += c[k]; failures += f[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
