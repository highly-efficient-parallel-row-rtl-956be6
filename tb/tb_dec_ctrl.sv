// tb_dec_ctrl -- checks the schedule of the controller for r = 10, L = 4
// (3 layers, the last with 2 rows), 5 blocks per layer, at most 3
// iterations: per period, 5 check node slots starting 3 cycles after 5
// update slots; no update in the very first period; update layer one behind;
// the column shift is L, or 2 after the last layer; 'eval' only at the end
// of period 0 of iterations 2.. and of the final update-only period; stop
// on success (iteration count reported) or after the last iteration.
module tb_dec_ctrl;
  import mdpc_pkg::*;
  localparam int RSZ = 10, LANES = 4, NSLOT = 5, IMAXP = 3, NLAY = 3;
  localparam int T = NSLOT + 7, ITW = $clog2(IMAXP + 2), SAW = $clog2(NSLOT), LYW = $clog2(NLAY);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, eval_success = 0, busy, done, success, rd_issue, rd_first, rd_zero_old;
  logic m_rd, layer_done, wr_issue, eval, clear;
  logic [ITW-1:0] iters;
  logic [SAW-1:0] rd_slot, wr_slot;
  logic [LYW-1:0] rd_layer, wr_layer;
  logic [LANES-1:0] rd_lanes, wr_lanes;
  logic [LCW-1:0] wr_delta;
  int checks = 0, failures = 0;

  dec_ctrl #(.RSZ(RSZ), .LANES(LANES), .NSLOT(NSLOT), .IMAXP(IMAXP)) dut (.*);

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one decode; succeed at the first eval whose iteration is ok_iter
  task automatic run(input int ok_iter);
    int cyc, period, nevals;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0; nevals = 0;
    while (busy) begin
      int c, p, ly, it;
      c = cyc % T; p = cyc / T; ly = p % NLAY; it = p / NLAY + 1;
      eval_success = (it - 1 == ok_iter);
      #1;
      if (it <= IMAXP) begin
        chk(rd_issue == (c >= 3 && c < 3 + NSLOT), $sformatf("rd_issue cycle %0d", cyc));
        if (rd_issue) begin
          chk(int'(rd_slot) == c - 3 && int'(rd_layer) == ly, "rd slot/layer");
          chk(rd_zero_old == (it == 1), "zero_old");
          chk(rd_lanes == ((ly == NLAY - 1) ? 4'b0011 : 4'b1111), "rd lanes");
        end
      end else chk(!rd_issue, "read in update-only period");
      chk(wr_issue == (p > 0 && c < NSLOT), $sformatf("wr_issue cycle %0d", cyc));
      if (wr_issue) begin
        chk(int'(wr_slot) == c && int'(wr_layer) == (ly + NLAY - 1) % NLAY, "wr slot/layer");
        chk(int'(wr_delta) == ((ly == 0) ? 2 : LANES), "delta");
      end
      chk(eval == (c == T - 1 && ly == 0 && p > 0), $sformatf("eval cycle %0d", cyc));
      if (eval) nevals++;
      @(negedge clk);
      cyc++;
    end
    chk(done, "done");
    if (ok_iter <= IMAXP) begin
      chk(success && int'(iters) == ok_iter, "success and iteration count");
      chk(cyc == (ok_iter * NLAY + 1) * T, $sformatf("latency %0d", cyc));
    end else begin
      chk(!success && int'(iters) == IMAXP, "failure after the maximum");
      chk(cyc == (IMAXP * NLAY + 1) * T, $sformatf("latency %0d", cyc));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1);
    run(2);
    run(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
