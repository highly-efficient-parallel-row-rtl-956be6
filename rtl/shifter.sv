// shifter -- cyclic left rotation of the 2L a-posteriori values read from
// the two RAM U banks.
//
// Inputs g (RAM U0 word, even block column) and h (RAM U1 word, odd block
// column) form a 2L-entry vector {h, g} with g0 at position 0. The vector is
// rotated left by s (the low log2(2L) bits of the identity block's first
// column) so that output position i holds input position (i + s) mod 2L:
// g_o are then the L consecutive values starting at the block's first
// column. Built as log2(2L) levels of 2:1 multiplexers, the level for the
// most significant shift bit first, as in the published 16-entry example.
// Purely combinational; DW is the width of one entry.
module shifter #(
  parameter int L  = mdpc_pkg::L,
  parameter int DW = mdpc_pkg::PW
) (
  input  logic [L-1:0][DW-1:0]      g,
  input  logic [L-1:0][DW-1:0]      h,
  input  logic [$clog2(2*L)-1:0]    s,
  output logic [L-1:0][DW-1:0]      g_o,
  output logic [L-1:0][DW-1:0]      h_o
);
  localparam int N2 = 2 * L;
  localparam int LV = $clog2(N2);

  logic [LV:0][N2-1:0][DW-1:0] st;

  assign st[0] = {h, g};
  for (genvar lv = 0; lv < LV; lv++) begin : g_level
    // level lv uses shift bit LV-1-lv (weight 2^(LV-1-lv))
    for (genvar i = 0; i < N2; i++) begin : g_mux
      assign st[lv+1][i] = s[LV-1-lv] ? st[lv][(i + (1 << (LV-1-lv))) % N2] : st[lv][i];
    end
  end
  assign {h_o, g_o} = st[LV];
endmodule
