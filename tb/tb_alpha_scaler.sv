// tb_alpha_scaler -- checks alpha*v for every sign and magnitude against
// real arithmetic: round(|v| * alpha * 2^FRAC) with the sign applied.
// The expected value is computed with real numbers, independently of the
// shift-and-add structure of the design.
module tb_alpha_scaler;
  import mdpc_pkg::*;
  msg_t v;
  apost_t av;
  int checks = 0, failures = 0;
  real alpha;

  alpha_scaler dut (.*);

  initial begin
    alpha = real'(AD1) / real'(1 << AE1) + real'(AD2) / real'(1 << AE2);
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < (1 << Q); m++) begin
        int e;
        v.sign = 1'(s); v.mag = Q'(m);
        #1;
        e = int'($floor(real'(m) * alpha * real'(1 << FRAC) + 0.5));
        if (s == 1) e = -e;
        checks++;
        if (int'(av) != e) begin
          failures++;
          $display("FAIL: sign %0d mag %0d: got %0d expected %0d", s, m, av, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
