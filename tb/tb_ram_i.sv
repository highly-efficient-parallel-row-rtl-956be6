// tb_ram_i -- checks RAM I: writes, then both read ports at random
// addresses with one cycle of read latency, with writes going on.
// The expected contents are kept in a plain array.
module tb_ram_i;
  import mdpc_pkg::*;
  localparam int DEPTH = N0 * W, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  col_t wdata = '0, rdata_a, rdata_b;
  col_t model [DEPTH];
  int checks = 0, failures = 0;

  ram_i dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = col_t'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 500; t++) begin
      col_t ea, eb;
      raddr_a = AW'($urandom_range(DEPTH - 1));
      raddr_b = AW'($urandom_range(DEPTH - 1));
      ea = model[raddr_a]; eb = model[raddr_b];
      we = 1'($urandom_range(1));
      waddr = AW'($urandom_range(DEPTH - 1));
      wdata = col_t'($urandom);
      if (waddr == raddr_a || waddr == raddr_b) we = 0;
      if (we) model[waddr] = wdata;
      @(negedge clk);
      checks += 2;
      if (rdata_a != ea) begin failures++; $display("FAIL port A"); end
      if (rdata_b != eb) begin failures++; $display("FAIL port B"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
