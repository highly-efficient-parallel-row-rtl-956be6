// tb_mdpc_workloads -- runs the (n0, r, w) = (2, 4801, 45) code with t = 84
// errors on decoders of parallelism L = 8, 16 and 32 (the higher-parallelism
// configurations whose memory sizes are tabulated alongside the L = 2
// design, two decodes each) and L = 1 (the serial row-layered decoder the
// parallel one extends, one decode), checked bit for bit against the
// behavioural reference. The L = 2 default is covered by tb_mdpc_full. Each
// instance reports its clock cycles per iteration, ceil(4801/L) x 97.
// The four decoders run side by side; the test ends when all are done.
module tb_mdpc_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fin1, fin8, fin16, fin32;
  int c1, c8, c16, c32, f1, f8, f16, f32, k1, k8, k16, k32;
  int checks = 0, failures = 0;

  mdpc_lrun #(.LANES(1), .NTRIAL(1)) u_l1 (.clk, .rst_n, .fin(fin1), .checks(c1), .failures(f1), .clk_per_iter(k1));
  mdpc_lrun #(.LANES(8))  u_l8  (.clk, .rst_n, .fin(fin8),  .checks(c8),  .failures(f8),  .clk_per_iter(k8));
  mdpc_lrun #(.LANES(16)) u_l16 (.clk, .rst_n, .fin(fin16), .checks(c16), .failures(f16), .clk_per_iter(k16));
  mdpc_lrun #(.LANES(32)) u_l32 (.clk, .rst_n, .fin(fin32), .checks(c32), .failures(f32), .clk_per_iter(k32));

  initial begin
    repeat (5000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c8 + c16 + c32, f1 + f8 + f16 + f32 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (fin1 && fin8 && fin16 && fin32);
    checks   = c1 + c8 + c16 + c32 + 1;
    failures = f1 + f8 + f16 + f32;
    // iteration length scales as ceil(r/L)
    if (!(k1 == 4801 * 97 && k8 == 601 * 97 && k16 == 301 * 97 && k32 == 151 * 97)) begin
      failures++;
      $display("FAIL: cycles per iteration %0d %0d %0d %0d", k1, k8, k16, k32);
    end
    $display("cycles per iteration: L=1 %0d, L=8 %0d, L=16 %0d, L=32 %0d", k1, k8, k16, k32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
