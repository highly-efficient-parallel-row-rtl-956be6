// tb_layer_lane -- drives one lane through the check node phase of random
// rows (with and without the first-iteration zero c2v) and the update phase
// of the same rows, and checks the v2c signs, the compressed c2v result and
// every updated a-posteriori value against the reference arithmetic.
module tb_layer_lane;
  import mdpc_pkg::*;
  import mdpc_ref_pkg::*;
  localparam int NSLOT = 12, SAW = $clog2(NSLOT);
  typedef mdpc_ref #(2, 67, 6, 4, 4) ref_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic r2_v = 0, r2_first = 0, r2_zero_old = 0, r2_sign_old = 0, w0_v = 0;
  apost_t r2_gamma = '0, w2_gamma;
  col_t r2_col = '0, w1_col = '0;
  comp_t r2_comp_old = '0, w1_comp = '0, comp_new;
  logic [SAW-1:0] r2_slot = '0, w0_slot = '0;
  logic r3_sign;
  int checks = 0, failures = 0;

  layer_lane #(.NSLOT(NSLOT)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int g [NSLOT], u [NSLOT], cols [NSLOT];
      bit so [NSLOT];
      int n1, n2, ni, ns, vm, vs;
      comp_t old;
      bit zero;
      zero = (t % 3 == 0);
      old.s = 1'($urandom); old.min1 = Q'($urandom_range(6)); old.min2 = Q'($urandom_range(15));
      old.idx = '0;
      n1 = 15; n2 = 15; ni = -1; ns = 0;
      for (int j = 0; j < NSLOT; j++) begin
        g[j] = int'($urandom_range(600)) - 300;
        cols[j] = j * 5 + t;
        so[j] = 1'($urandom);
        if (j == 3) old.idx = col_t'(cols[j]);
      end
      // check node phase
      for (int j = 0; j < NSLOT; j++) begin
        int mag;
        @(negedge clk);
        r2_v = 1; r2_first = (j == 0); r2_zero_old = zero; r2_gamma = apost_t'(g[j]);
        r2_col = col_t'(cols[j]); r2_comp_old = old; r2_sign_old = so[j]; r2_slot = SAW'(j);
        if (zero) begin vm = 0; vs = 0; end
        else begin vm = (cols[j] == int'(old.idx)) ? int'(old.min2) : int'(old.min1); vs = int'(old.s) ^ int'(so[j]); end
        u[j] = ref_t::sat(g[j] - ref_t::scale(vs, vm));
        mag = ((u[j] < 0 ? -u[j] : u[j]) + 2) >> 2;
        if (mag > 15) mag = 15;
        ns ^= int'(u[j] < 0);
        if (mag < n1) begin n2 = n1; n1 = mag; ni = cols[j]; end else if (mag < n2) n2 = mag;
        @(posedge clk); #1;
        r2_v = 0;
        checks++;
        if (r3_sign != (u[j] < 0)) begin failures++; $display("FAIL sign row %0d slot %0d", t, j); end
      end
      @(negedge clk); @(negedge clk);
      checks++;
      if (int'(comp_new.min1) != n1 || int'(comp_new.min2) != n2 || int'(comp_new.s) != ns ||
          (ni >= 0 && int'(comp_new.idx) != ni)) begin
        failures++; $display("FAIL comp row %0d", t);
      end
      // update phase
      w1_comp = comp_new;
      for (int j = 0; j < NSLOT; j++) begin
        int e;
        @(negedge clk);
        w0_v = 1; w0_slot = SAW'(j);
        @(negedge clk);
        w0_v = 0; w1_col = col_t'(cols[j]);
        vm = (cols[j] == int'(w1_comp.idx)) ? int'(w1_comp.min2) : int'(w1_comp.min1);
        vs = int'(w1_comp.s) ^ int'(u[j] < 0);
        e = ref_t::sat(u[j] + ref_t::scale(vs, vm));
        @(posedge clk); #1;
        checks++;
        if (int'(w2_gamma) != e) begin failures++; $display("FAIL update row %0d slot %0d: %0d vs %0d", t, j, w2_gamma, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
