// tb_rev_shifter -- checks the reverse shifter (L = 8 and L = 2): input
// position i must arrive at output (i + s) mod 2L, i.e. it undoes the
// shifter.
// Combinational block: outputs are checked right after the inputs change.
module tb_rev_shifter;
  localparam int DW = 11;
  logic [7:0][DW-1:0] g, h, g_o, h_o;
  logic [3:0] s;
  logic [1:0][DW-1:0] g2, h2, g2_o, h2_o;
  logic [1:0] s2;
  int checks = 0, failures = 0;

  rev_shifter #(.L(8), .DW(DW)) dut (.*);
  rev_shifter #(.L(2), .DW(DW)) dut2 (.g(g2), .h(h2), .s(s2), .g_o(g2_o), .h_o(h2_o));

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [15:0][DW-1:0] in, out;
      logic [3:0][DW-1:0] in2, out2;
      for (int i = 0; i < 8; i++) begin g[i] = DW'($urandom); h[i] = DW'($urandom); end
      for (int i = 0; i < 2; i++) begin g2[i] = DW'($urandom); h2[i] = DW'($urandom); end
      s = 4'($urandom); s2 = 2'($urandom);
      #1;
      in = {h, g}; out = {h_o, g_o}; in2 = {h2, g2}; out2 = {h2_o, g2_o};
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (out[(i + int'(s)) % 16] != in[i]) begin failures++; $display("FAIL s=%0d i=%0d", s, i); end
      end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (out2[(i + int'(s2)) % 4] != in2[i]) begin failures++; $display("FAIL L=2 s=%0d i=%0d", s2, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
