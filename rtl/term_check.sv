// term_check -- decides, without a separate syndrome pass, whether the hard
// decisions at the end of an iteration form a codeword.
//
// The decoder stops when x*H^T = 0. Here the check is folded into decoding:
// while a layer is read, the signs of the a-posteriori values of each
// row's columns are XORed per lane, giving that row's parity. An iteration
// passes when every row had even parity and no a-posteriori value written
// back during that iteration changed sign relative to the value read for
// the same block (the read signs are kept per slot and lane). If no sign
// changes, every row's parity seen during the iteration still holds at its
// end, so the decisions are a codeword. This mechanism is this design's own;
// the published architecture only states the stopping rule.
//
// Timing: 'layer_done' comes after the last parity update of a layer; the
// parity result of a full iteration is kept in ok_final after its last
// layer. Flips are accumulated until 'eval', which marks the end of the
// period in which the last layer of that iteration was written back;
// 'success' is valid in that cycle and the flip record is cleared.
//
// Cost of this choice: a decode whose last sign change happens in iteration
// k is declared successful only after iteration k+1 has shown no change, so
// it reports k+1 iterations where an exact syndrome check after each
// iteration would stop after k.
module term_check #(
  parameter int NSLOT = mdpc_pkg::N0 * mdpc_pkg::W,
  parameter int LANES = mdpc_pkg::L,
  parameter int SAW   = $clog2(NSLOT)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,        // start of a new codeword
  // check node phase, stage R3
  input  logic              r3_v,
  input  logic              r3_first,
  input  logic [SAW-1:0]    r3_slot,
  input  logic [LANES-1:0]  r3_lanes,     // active rows of the layer
  input  logic [LANES-1:0]  r3_hd,        // sign bits of the values read
  input  logic              layer_done,
  input  logic              first_layer,  // the finished layer is layer 0
  input  logic              last_layer,   // the finished layer is the last one
  // update phase, stage W2
  input  logic              w2_v,
  input  logic [SAW-1:0]    w2_slot,
  input  logic [LANES-1:0]  w2_lanes,
  input  logic [LANES-1:0]  w2_hd,        // sign bits of the values written
  input  logic              eval,
  output logic              success,
  output logic              flip          // a sign change has been seen
);
  logic [LANES-1:0] par;
  logic [LANES-1:0] lanes_q;
  logic [LANES-1:0] rsign [NSLOT];
  logic             ok_iter, ok_final, flip_iter, layer_ok;

  assign layer_ok = ~|(par & lanes_q);
  assign success  = ok_final & ~flip_iter;
  assign flip     = flip_iter;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par <= '0; lanes_q <= '0; ok_iter <= 1'b0; ok_final <= 1'b0; flip_iter <= 1'b0;
    end else if (clear) begin
      par <= '0; ok_iter <= 1'b0; ok_final <= 1'b0; flip_iter <= 1'b0;
    end else begin
      if (r3_v) begin
        par     <= (r3_first ? '0 : par) ^ (r3_hd & r3_lanes);
        lanes_q <= r3_lanes;
      end
      if (layer_done) begin
        ok_iter <= (first_layer ? 1'b1 : ok_iter) & layer_ok;
        if (last_layer) ok_final <= (first_layer ? 1'b1 : ok_iter) & layer_ok;
      end
      if (eval)
        flip_iter <= 1'b0;
      else if (w2_v && |((rsign[w2_slot] ^ w2_hd) & w2_lanes))
        flip_iter <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (r3_v) rsign[r3_slot] <= r3_hd;
  end
endmodule
