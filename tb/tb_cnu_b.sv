// tb_cnu_b -- checks CNU B: min2 for the column that gave min1, min1 for
// every other column, sign = s xor own v2c sign; random and matching cases.
// Combinational block: outputs are checked 1 time unit after the inputs.
module tb_cnu_b;
  import mdpc_pkg::*;
  comp_t comp;
  col_t  col;
  logic  v2c_sign;
  msg_t  c2v;
  int checks = 0, failures = 0;

  cnu_b dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      comp.s = 1'($urandom_range(1));
      comp.min1 = Q'($urandom_range(15));
      comp.min2 = Q'($urandom_range(15));
      comp.idx = IDXW'($urandom_range((1 << IDXW) - 1));
      col = (t % 2 == 0) ? comp.idx : col_t'($urandom_range((1 << IDXW) - 1));
      v2c_sign = 1'($urandom_range(1));
      #1;
      checks++;
      if (c2v.mag != ((col == comp.idx) ? comp.min2 : comp.min1) || c2v.sign != (comp.s ^ v2c_sign)) begin
        failures++;
        $display("FAIL: case %0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
