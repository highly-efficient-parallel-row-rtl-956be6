// rev_shifter -- reverse shifter: cyclic right rotation that undoes
// 'shifter' so updated a-posteriori values land in RAM U word order.
//
// Input position i goes to output position (i + s) mod 2L. g/h inputs are
// the L updated values (g) and the L other entries (h); outputs g_o go to
// RAM U0 and h_o to RAM U1. Same log2(2L) multiplexer levels as the
// shifter. Purely combinational; DW is the width of one entry.
//
// The published design feeds the untouched entries h' back through this
// shifter and rewrites both words; here the decoder drives h with zeros and
// a 1-bit copy of the reverse shifter rotates per-lane write enables instead.
module rev_shifter #(
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
      assign st[lv+1][i] = s[LV-1-lv] ? st[lv][(i + N2 - (1 << (LV-1-lv))) % N2] : st[lv][i];
    end
  end
  assign {h_o, g_o} = st[LV];
endmodule
