// tb_term_check -- checks the stopping test on scripted iterations of three
// layers: all parities even and no sign change gives success; an odd row
// parity, a sign change on an active lane, or one on an idle lane (which
// must be ignored) are each tried, then 60 random combinations.
module tb_term_check;
  localparam int NSLOT = 6, LANES = 4, SAW = $clog2(NSLOT);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, r3_v = 0, r3_first = 0, layer_done = 0, first_layer = 0, last_layer = 0;
  logic w2_v = 0, eval = 0, success, flip;
  logic [SAW-1:0] r3_slot = '0, w2_slot = '0;
  logic [LANES-1:0] r3_lanes = '0, r3_hd = '0, w2_lanes = '0, w2_hd = '0;
  int checks = 0, failures = 0;

  term_check #(.NSLOT(NSLOT), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one iteration of 3 layers; bad_par: layer with odd parity on lane 1
  // (-1: none); flip_lane: lane whose written sign differs (-1: none)
  task automatic iteration(input int bad_par, input int flip_lane, input bit exp_ok);
    logic [LANES-1:0] hd [3][NSLOT];
    for (int l = 0; l < 3; l++) begin
      logic [LANES-1:0] acc, lanes;
      lanes = (l == 2) ? 4'b0111 : 4'b1111;
      acc = '0;
      for (int j = 0; j < NSLOT; j++) begin
        if (j < NSLOT - 1) hd[l][j] = LANES'($urandom);
        else begin
          hd[l][j] = acc;
          if (l == bad_par) hd[l][j][1] = ~hd[l][j][1];
          if (l == 2) hd[l][j][3] = $urandom_range(1);  // idle lane: any value
        end
        acc ^= hd[l][j];
        @(negedge clk);
        r3_v = 1; r3_first = (j == 0); r3_slot = SAW'(j); r3_lanes = lanes; r3_hd = hd[l][j];
      end
      @(negedge clk);
      r3_v = 0;
      layer_done = 1; first_layer = (l == 0); last_layer = (l == 2);
      @(negedge clk);
      layer_done = 0;
      // write-back of this layer
      for (int j = 0; j < NSLOT; j++) begin
        w2_v = 1; w2_slot = SAW'(j); w2_lanes = lanes; w2_hd = hd[l][j];
        if (l == 1 && j == 2 && flip_lane >= 0) w2_hd[flip_lane] = ~w2_hd[flip_lane];
        if (l == 2) w2_hd[3] = ~w2_hd[3];  // idle lane: must be ignored
        @(negedge clk);
      end
      w2_v = 0;
    end
    eval = 1;
    #1;
    checks++;
    if (success != exp_ok) begin failures++; $display("FAIL: success %0d expected %0d", success, exp_ok); end
    @(negedge clk);
    eval = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    iteration(-1, -1, 1);
    iteration(1, -1, 0);
    iteration(2, -1, 0);
    iteration(-1, 2, 0);
    iteration(-1, -1, 1);
    iteration(0, 0, 0);
    iteration(-1, -1, 1);
    // random mix of the cases above
    for (int n = 0; n < 60; n++) begin
      int bp, fl;
      bp = int'($urandom_range(5)) - 2;   // -2..3: layers 0..2 or none
      fl = int'($urandom_range(4)) - 1;   // -1: none, else the lane changed in layer 1
      if (bp < 0) bp = -1;
      if (bp > 2) bp = -1;
      iteration(bp, fl, bp < 0 && fl < 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
