// cnu_a -- check node unit part A: iterative computation of the compressed
// c2v messages of one parity-check row.
//
// One v2c message of the row (sign, q-bit magnitude and the column index it
// comes from) is absorbed per enabled cycle. Two comparators decide whether
// the new magnitude replaces min1 (old min1 then moves to min2 and idx takes
// the new column) or only min2; the sign of the message is XORed into s.
// This is the min1/min2/idx/s recursion of the scaled Min-sum check node.
// A pulse on 'first' together with 'en' starts a new row: the registers are
// loaded as if min1 = min2 = 2^q-1 and s = 0 had been held before.
//
// Timing: the result 'comp' is a register; it holds the complete row one
// cycle after the last message has been absorbed. Ties keep the earlier
// column as idx (strict less-than), a choice of this implementation.
module cnu_a
  import mdpc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,      // absorb one message this cycle
  input  logic  first,   // this message is the first of a new row
  input  msg_t  v2c,     // v2c message (sign, magnitude)
  input  col_t  col,     // column index of the message
  output comp_t comp     // running compressed c2v message
);
  logic [Q-1:0] min1_c, min2_c;
  logic         s_c;
  col_t         idx_c;
  logic         lt1, lt2;

  always_comb begin
    // state seen by the comparators: reset values at the start of a row
    min1_c = first ? {Q{1'b1}} : comp.min1;
    min2_c = first ? {Q{1'b1}} : comp.min2;
    s_c    = first ? 1'b0      : comp.s;
    idx_c  = first ? col       : comp.idx;
    lt1    = v2c.mag < min1_c;
    lt2    = v2c.mag < min2_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      comp <= '0;
    end else if (en) begin
      comp.s <= s_c ^ v2c.sign;
      if (lt1) begin
        comp.min1 <= v2c.mag;
        comp.min2 <= min1_c;
        comp.idx  <= col;
      end else begin
        comp.min1 <= min1_c;
        comp.min2 <= lt2 ? v2c.mag : min2_c;
        comp.idx  <= idx_c;
      end
    end
  end
endmodule
