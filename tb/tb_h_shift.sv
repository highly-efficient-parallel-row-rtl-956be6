// tb_h_shift -- checks the next-layer corner: (loc + delta) mod r inside
// the same submatrix, for random corners and for every wrap boundary.
// Combinational block: outputs are checked right after the inputs change.
module tb_h_shift;
  import mdpc_pkg::*;
  col_t a, a_next;
  logic [LCW-1:0] delta;
  int checks = 0, failures = 0;

  h_shift dut (.*);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int loc, d;
      loc = (t < 64) ? R - 1 - t % 32 : int'($urandom_range(R - 1));
      d   = (t < 64) ? 1 + t % 2 + (t / 32) : 1 + int'($urandom_range(63));
      a.sub = SCW'($urandom_range(N0 - 1)); a.loc = LCW'(loc); delta = LCW'(d);
      #1;
      checks++;
      if (int'(a_next.loc) != (loc + d) % R || a_next.sub != a.sub) begin
        failures++;
        $display("FAIL: %0d + %0d gave %0d", loc, d, a_next.loc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
