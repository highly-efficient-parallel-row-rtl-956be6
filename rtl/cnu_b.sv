// cnu_b -- check node unit part B (also used as CNU B'): recovers the c2v
// message of one column from the compressed c2v messages of its row.
//
// The column index is compared with the stored idx: the column that supplied
// min1 receives min2, every other column receives min1. The sign is the XOR
// of the row sign s with the sign of that column's own v2c message.
// Purely combinational.
//
// The structure (one comparator on idx, a min1/min2 multiplexer and a sign
// XOR) is the published one; ports: comp, col, v2c_sign in, c2v out.
module cnu_b
  import mdpc_pkg::*;
(
  input  comp_t comp,     // compressed c2v messages of the row
  input  col_t  col,      // column the message is for
  input  logic  v2c_sign, // sign of the v2c message of that column
  output msg_t  c2v       // c2v message
);
  always_comb begin
    c2v.mag  = (col == comp.idx) ? comp.min2 : comp.min1;
    c2v.sign = comp.s ^ v2c_sign;
  end
endmodule
