// tb_mdpc_decoder -- end-to-end test of the decoder on a small constrained
// code: n0 = 2, r = 67, w = 5, L = 4, at most 8 iterations.
//
// r = 67 is prime and not a multiple of 2L, so the last layer has 3 rows
// (one lane idle), each submatrix has 3 columns in tail registers and
// identity blocks wrap around the submatrix edge. For each trial a random
// constrained code and a codeword are generated, errors are added, and the
// result (success flag, iteration count, every decoded bit, the cycle count)
// is compared with the behavioural reference in mdpc_ref_pkg. Successful
// decodes are also checked against the true syndrome, and low-weight errors
// against the transmitted codeword. Every mechanism (tail registers,
// wrapped blocks, idle lanes in the last layer, first-iteration zero c2v,
// sign flips, early stop, failure after the maximum iteration count) must
// occur at least once.
module tb_mdpc_decoder;
  import mdpc_pkg::*;
  import mdpc_ref_pkg::*;

  localparam int NSUB = 2, RSZ = 67, WCOL = 5, LANES = 4, IMAXP = 8;
  localparam int NSLOT = NSUB * WCOL;
  localparam int NLAY  = (RSZ + LANES - 1) / LANES;
  localparam int SAW   = $clog2(NSLOT);
  localparam int BCW   = $clog2(NLAY);
  localparam int ITW   = $clog2(IMAXP + 2);
  localparam int T     = NSLOT + 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              hi_we = 0;
  logic [SAW-1:0]    hi_addr = '0;
  col_t              hi_col = '0;
  logic              ld_en = 0;
  logic [SCW-1:0]    ld_sub = '0;
  logic [BCW-1:0]    ld_blk = '0;
  logic [LANES-1:0]  ld_bits = '0;
  logic              ro_en = 0;
  logic [SCW-1:0]    ro_sub = '0;
  logic [BCW-1:0]    ro_blk = '0;
  logic [LANES-1:0]  ro_bits;
  logic              start = 0, busy, done, success;
  logic [ITW-1:0]    iters;

  mdpc_decoder #(.NSUB(NSUB), .RSZ(RSZ), .WCOL(WCOL), .LANES(LANES), .IMAXP(IMAXP)) dut (.*);

  int checks = 0, failures = 0;
  int n_tail = 0, n_wrap = 0, n_idle = 0, n_zero = 0, n_flip = 0, n_early = 0, n_fail = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters
  always @(posedge clk) begin
    if (dut.r2.v && dut.u_apost.rd_tail) n_tail++;
    if (dut.r2.v && dut.u_apost.rd_wrap) n_wrap++;
    if (dut.r2.v && dut.r2.lanes != '1) n_idle++;
    if (dut.r2.v && dut.r2.zero_old)    n_zero++;
    if (dut.u_term.w2_v &&
        |((dut.u_term.rsign[dut.u_term.w2_slot] ^ dut.u_term.w2_hd) & dut.u_term.w2_lanes)) n_flip++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mdpc_ref #(NSUB, RSZ, WCOL, LANES, IMAXP) ref_m;

  task automatic run_trial(input int nerr, input bit random_word);
    bit x [NSUB][RSZ];
    bit y [NSUB][RSZ];
    int cyc, exp_cyc, mism;
    ref_m.random_code();
    ref_m.codeword(x);
    y = x;
    if (random_word) begin
      foreach (y[i, t]) y[i][t] = bit'($urandom_range(1));
    end else begin
      int e;
      e = 0;
      while (e < nerr) begin
        int i, t;
        i = int'($urandom_range(NSUB - 1));
        t = int'($urandom_range(RSZ - 1));
        if (y[i][t] == x[i][t]) begin y[i][t] = ~y[i][t]; e++; end
      end
    end
    // load H corners (layer 0) and the received word
    @(negedge clk);
    for (int j = 0; j < NSLOT; j++) begin
      hi_we = 1; hi_addr = SAW'(j);
      hi_col.sub = SCW'(j / WCOL); hi_col.loc = LCW'(ref_m.supp[j / WCOL][j % WCOL]);
      @(negedge clk);
    end
    hi_we = 0;
    for (int i = 0; i < NSUB; i++)
      for (int b = 0; b < NLAY; b++) begin
        ld_en = 1; ld_sub = SCW'(i); ld_blk = BCW'(b);
        for (int m = 0; m < LANES; m++) ld_bits[m] = (b * LANES + m < RSZ) ? y[i][b * LANES + m] : 1'b0;
        @(negedge clk);
      end
    ld_en = 0;
    ref_m.decode(y);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    // one period per layer and iteration, one update-only period, and the
    // cycle in which 'done' is registered
    exp_cyc = (ref_m.success ? ref_m.iters * NLAY + 1 : IMAXP * NLAY + 1) * T + 1;
    check(success == ref_m.success, $sformatf("success %0d vs model %0d", success, ref_m.success));
    check(int'(iters) == ref_m.iters, $sformatf("iterations %0d vs model %0d", iters, ref_m.iters));
    check(cyc == exp_cyc, $sformatf("cycles %0d, expected %0d", cyc, exp_cyc));
    if (success) n_early++; else n_fail++;
    // read back the decoded word
    mism = 0;
    for (int i = 0; i < NSUB; i++)
      for (int b = 0; b < NLAY; b++) begin
        ro_en = 1; ro_sub = SCW'(i); ro_blk = BCW'(b);
        @(negedge clk);
        ro_en = 0;
        for (int m = 0; m < LANES; m++) if (b * LANES + m < RSZ) begin
          if (ro_bits[m] != ref_m.hard(i, b * LANES + m)) mism++;
          y[i][b * LANES + m] = ro_bits[m];
        end
      end
    check(mism == 0, $sformatf("%0d decoded bits differ from the model", mism));
    if (success) check(ref_m.syndrome_zero(y), "decoded word is not a codeword");
    if (!random_word && nerr <= 1) check(y == x, "single-error word not corrected");
    $display("trial nerr=%0d random=%0d: success=%0d iters=%0d cycles=%0d", nerr, random_word, success, iters, cyc);
  endtask

  initial begin
    ref_m = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_trial(0, 0);
    for (int t = 0; t < 6; t++) run_trial(1 + t % 3, 0);
    run_trial(0, 1);
    run_trial(0, 1);
    check(n_tail > 0, "tail registers never used");
    check(n_wrap > 0, "no wrapped identity block");
    check(n_idle > 0, "last layer lanes never idle");
    check(n_zero > 0, "first-iteration zero c2v never used");
    check(n_flip > 0, "no a-posteriori sign change seen");
    check(n_early > 0, "no successful decode");
    check(n_fail > 0, "maximum iteration count never reached");
    $display("mechanisms: tail=%0d wrap=%0d idle=%0d zero=%0d flip=%0d success=%0d fail=%0d",
             n_tail, n_wrap, n_idle, n_zero, n_flip, n_early, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
