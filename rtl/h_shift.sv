// h_shift -- "H matrix shifting": next-layer column index of an identity
// block corner.
//
// Each circulant row is the previous row cyclically shifted by one, so the
// identity-block corners of the next layer are the current ones moved right
// by the number of rows in the layer (L, or the smaller row count of the
// last, incomplete layer when wrapping back to layer 0), modulo r inside the
// same submatrix. The submatrix number is kept. Purely combinational.
//
// The published block adds L mod r; the smaller shift after the last layer,
// which brings the corners back to layer 0 for the next iteration, is this
// design's reading of how the incomplete last layer is handled.
module h_shift
  import mdpc_pkg::*;
#(
  parameter int RR = mdpc_pkg::R    // circulant size
) (
  input  col_t           a,      // current corner column
  input  logic [LCW-1:0] delta,  // shift, 0 < delta < RR
  output col_t           a_next  // corner column of the next layer
);
  logic [LCW:0] sum;
  always_comb begin
    sum          = {1'b0, a.loc} + {1'b0, delta};
    a_next.sub   = a.sub;
    a_next.loc   = (sum >= (LCW+1)'(RR)) ? LCW'(sum - (LCW+1)'(RR)) : LCW'(sum);
  end
endmodule
