// tb_apost_mem -- checks the a-posteriori memory on r = 67, L = 4, n0 = 2
// (3 tail columns per submatrix, blocks that wrap past column 66) against a
// plain array: channel load of every block column, read-out of the hard
// decisions, block reads at every corner column (data one cycle later) and
// block writes with random lane enables at random corners.
module tb_apost_mem;
  import mdpc_pkg::*;
  localparam int NSUB = 2, RSZ = 67, LANES = 4;
  localparam int NBLK = (RSZ + LANES - 1) / LANES, BCW = $clog2(NBLK);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0, ld_en = 0, ro_en = 0, rd_tail, rd_wrap;
  col_t rd_a = '0, wr_a = '0;
  apost_t [LANES-1:0] rd_gamma, wr_gamma = '0;
  logic [LANES-1:0] wr_lane = '0, ld_bits = '0, ro_bits;
  logic [SCW-1:0] ld_sub = '0, ro_sub = '0;
  logic [BCW-1:0] ld_blk = '0, ro_blk = '0;
  int model [NSUB][RSZ];
  int checks = 0, failures = 0, n_tail = 0, n_wrap = 0;

  apost_mem #(.NSUB(NSUB), .RSZ(RSZ), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(input int i, input int c);
    @(negedge clk);
    rd_en = 1; rd_a.sub = SCW'(i); rd_a.loc = LCW'(c);
    @(negedge clk);
    rd_en = 0;
    if (rd_tail) n_tail++;
    if (rd_wrap) n_wrap++;
    for (int m = 0; m < LANES; m++) begin
      checks++;
      if (int'(rd_gamma[m]) != model[i][(c + m) % RSZ]) begin
        failures++;
        $display("FAIL read sub %0d corner %0d lane %0d: %0d vs %0d", i, c, m, rd_gamma[m], model[i][(c + m) % RSZ]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NSUB; i++)
      for (int b = 0; b < NBLK; b++) begin
        ld_en = 1; ld_sub = SCW'(i); ld_blk = BCW'(b); ld_bits = LANES'($urandom);
        for (int m = 0; m < LANES; m++)
          if (b * LANES + m < RSZ) model[i][b * LANES + m] = ld_bits[m] ? -(CH << FRAC) : (CH << FRAC);
        @(negedge clk);
      end
    ld_en = 0;
    for (int i = 0; i < NSUB; i++)
      for (int b = 0; b < NBLK; b++) begin
        ro_en = 1; ro_sub = SCW'(i); ro_blk = BCW'(b);
        @(negedge clk);
        ro_en = 0;
        for (int m = 0; m < LANES; m++) if (b * LANES + m < RSZ) begin
          checks++;
          if (ro_bits[m] != (model[i][b * LANES + m] < 0)) begin failures++; $display("FAIL read-out"); end
        end
      end
    for (int i = 0; i < NSUB; i++)
      for (int c = 0; c < RSZ; c++) check_read(i, c);
    for (int t = 0; t < 400; t++) begin
      int i, c;
      i = int'($urandom_range(NSUB - 1));
      c = (t % 4 == 0) ? RSZ - 1 - int'($urandom_range(LANES + 3)) : int'($urandom_range(RSZ - 1));
      @(negedge clk);
      wr_en = 1; wr_a.sub = SCW'(i); wr_a.loc = LCW'(c); wr_lane = LANES'($urandom);
      for (int m = 0; m < LANES; m++) begin
        wr_gamma[m] = apost_t'($urandom);
        if (wr_lane[m]) model[i][(c + m) % RSZ] = int'(wr_gamma[m]);
      end
      @(negedge clk);
      wr_en = 0;
      check_read(i, (c + RSZ - 2) % RSZ);
      check_read(int'($urandom_range(NSUB - 1)), int'($urandom_range(RSZ - 1)));
    end
    checks++;
    if (n_tail == 0 || n_wrap == 0) begin failures++; $display("FAIL: tail/wrap not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
