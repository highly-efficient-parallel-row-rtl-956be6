// mdpc_lrun -- testbench helper: one decoder instance with the given
// parallelism, driven through a few decodes of a full-length code and
// compared with the behavioural reference. Used by tb_mdpc_workloads to run
// the same code at several values of L side by side.
//
// For each of NTRIAL trials a random code constrained by LANES is drawn, a
// codeword gets NERR errors and is decoded; success, iteration count, cycle
// count ((iterations x ceil(r/L) + 1) x (n0 w + 7) + 1) and every decoded
// bit are checked, and a successful result must satisfy all parity checks.
// 'fin' rises when all trials are over; 'clk_per_iter' reports the clock
// cycles of one iteration for comparison with the published figures.
module mdpc_lrun
  import mdpc_pkg::*;
  import mdpc_ref_pkg::*;
#(
  parameter int NSUB = 2, parameter int RSZ = 4801, parameter int WCOL = 45,
  parameter int LANES = 8, parameter int IMAXP = 30, parameter int NERR = 84,
  parameter int NTRIAL = 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic fin,
  output int   checks,
  output int   failures,
  output int   clk_per_iter
);
  localparam int NSLOT = NSUB * WCOL;
  localparam int NLAY  = (RSZ + LANES - 1) / LANES;
  localparam int SAW   = $clog2(NSLOT);
  localparam int BCW   = $clog2(NLAY);
  localparam int ITW   = $clog2(IMAXP + 2);
  localparam int T     = NSLOT + 7;

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

  mdpc_decoder #(.NSUB(NSUB), .RSZ(RSZ), .WCOL(WCOL), .LANES(LANES), .IMAXP(IMAXP)) dut (
    .clk, .rst_n, .hi_we, .hi_addr, .hi_col, .ld_en, .ld_sub, .ld_blk, .ld_bits,
    .ro_en, .ro_sub, .ro_blk, .ro_bits, .start, .busy, .done, .success, .iters);

  mdpc_ref #(NSUB, RSZ, WCOL, LANES, IMAXP) ref_m;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL (L=%0d): %s", LANES, what);
    end
  endtask

  initial begin
    bit x [NSUB][RSZ];
    bit y [NSUB][RSZ];
    int cyc, exp_cyc, mism;
    fin = 0; checks = 0; failures = 0;
    clk_per_iter = NLAY * T;
    ref_m = new();
    @(posedge rst_n);
    for (int trial = 0; trial < NTRIAL; trial++) begin
      int e;
      ref_m.random_code();
      ref_m.codeword(x);
      y = x;
      e = 0;
      while (e < NERR) begin
        int i, t;
        i = int'($urandom_range(NSUB - 1));
        t = int'($urandom_range(RSZ - 1));
        if (y[i][t] == x[i][t]) begin y[i][t] = ~y[i][t]; e++; end
      end
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
      exp_cyc = (ref_m.success ? ref_m.iters * NLAY + 1 : IMAXP * NLAY + 1) * T + 1;
      check(success == ref_m.success, $sformatf("success %0d vs model %0d", success, ref_m.success));
      check(int'(iters) == ref_m.iters, $sformatf("iterations %0d vs model %0d", iters, ref_m.iters));
      check(cyc == exp_cyc, $sformatf("cycles %0d, expected %0d", cyc, exp_cyc));
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
      $display("L=%0d trial %0d: %0d errors, success=%0d iters=%0d cycles=%0d (%0d per iteration)",
               LANES, trial, NERR, success, iters, cyc, clk_per_iter);
    end
    fin = 1;
  end
endmodule
