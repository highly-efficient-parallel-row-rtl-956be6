// tb_sdp_ram -- checks the RAM: per-lane write masks, synchronous read with
// one cycle of latency, old data on a read of the word being written, and
// rdata held while re is low.
// The expected contents are kept in a plain array.
module tb_sdp_ram;
  localparam int DEPTH = 40, LANES = 4, LW = 11, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [LANES-1:0] wmask = '0;
  logic [LANES-1:0][LW-1:0] wdata = '0, rdata;
  logic [LANES-1:0][LW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.DEPTH(DEPTH), .LANES(LANES), .LW(LW)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; wmask = '1; waddr = AW'(i);
      for (int m = 0; m < LANES; m++) wdata[m] = LW'($urandom);
      model[i] = wdata;
    end
    for (int t = 0; t < 600; t++) begin
      logic [LANES-1:0][LW-1:0] exp_d, prev;
      logic re_now;
      @(negedge clk);
      prev = rdata;
      re_now = 1'($urandom_range(3) != 0);
      re = re_now;
      raddr = AW'($urandom_range(DEPTH - 1));
      exp_d = re_now ? model[raddr] : prev;
      we = 1'($urandom_range(1));
      waddr = (t % 5 == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wmask = LANES'($urandom);
      for (int m = 0; m < LANES; m++) wdata[m] = LW'($urandom);
      if (we) for (int m = 0; m < LANES; m++) if (wmask[m]) model[waddr][m] = wdata[m];
      @(posedge clk); #1;
      checks++;
      if (rdata != exp_d) begin failures++; $display("FAIL at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
