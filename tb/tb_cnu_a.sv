// tb_cnu_a -- checks CNU A against an independent min1/min2/idx/sign
// computation over random rows of 1 to 90 messages, including rows with
// repeated magnitudes; the result must be ready one cycle after the last
// message.
// Ties are expected to keep the earlier column (this design's choice).
module tb_cnu_a;
  import mdpc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, first = 0;
  msg_t v2c = '0;
  col_t col = '0;
  comp_t comp;
  int checks = 0, failures = 0;

  cnu_a dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n, e1, e2, ei, es;
      n  = 1 + int'($urandom_range(89));
      e1 = (1 << Q) - 1; e2 = (1 << Q) - 1; ei = -1; es = 0;
      for (int k = 0; k < n; k++) begin
        en = 1; first = (k == 0);
        v2c.sign = 1'($urandom_range(1));
        v2c.mag  = (t % 4 == 0) ? Q'($urandom_range(2) + 5) : Q'($urandom_range((1 << Q) - 1));
        col.sub  = SCW'($urandom_range(1));
        col.loc  = LCW'($urandom_range(4800));
        es ^= int'(v2c.sign);
        if (int'(v2c.mag) < e1) begin e2 = e1; e1 = int'(v2c.mag); ei = int'(col); end
        else if (int'(v2c.mag) < e2) e2 = int'(v2c.mag);
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (int'(comp.min1) != e1 || int'(comp.min2) != e2 || int'(comp.s) != es ||
          (ei >= 0 && int'(comp.idx) != ei)) begin
        failures++;
        $display("FAIL row %0d: got %0d %0d %0h %0d, expected %0d %0d %0h %0d",
                 t, comp.min1, comp.min2, comp.idx, comp.s, e1, e2, ei, es);
      end
      if (t % 3 == 0) @(negedge clk);   // idle cycles must not disturb the result
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
