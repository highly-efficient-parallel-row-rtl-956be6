// layer_lane -- one of the L identical lanes of the decoder: it handles one
// row of the layer being decoded (check node phase) and, one layer later,
// the a-posteriori update of the same row's columns.
//
// Check node phase (row of layer l, iteration k), one identity block per
// cycle:
//   R2  v^(k-1,l) = CNU B(compressed row of iteration k-1, column, old sign)
//       (forced to 0 in the first iteration, when no c2v message exists yet)
//       u^(k,l) = gamma - alpha*v^(k-1,l), saturated to p+1 bits      (eq. 2)
//   R3  u is written to RAM T at the block's slot; its sign goes to RAM S;
//       its magnitude, rounded to an integer and saturated to 2^q-1, and
//       its sign enter CNU A.
// The compressed v^(k,l) is in comp_new one cycle after the last block.
// Update phase (same row, during the next layer's check node phase):
//   W0  RAM T read at the slot
//   W1  v^(k,l) = CNU B'(compressed v^(k,l), column, sign of u)
//       gamma' = u + alpha*v^(k,l), saturated                          (eq. 1)
//   W2  gamma' is registered in w2_gamma for the write-back.
// RAM T (n0*w words of p+1 bits) is the lane's v2c buffer. Rounding the
// v2c value to an integer for CNU A is this design's choice; the text only
// says the magnitude is saturated to 2^q-1.
module layer_lane
  import mdpc_pkg::*;
#(
  parameter int NSLOT = mdpc_pkg::N0 * mdpc_pkg::W,
  parameter int SAW   = $clog2(NSLOT)
) (
  input  logic            clk,
  input  logic            rst_n,
  // check node phase, stage R2
  input  logic            r2_v,         // block valid and lane active
  input  logic            r2_first,     // first block of the layer
  input  logic            r2_zero_old,  // first iteration: old c2v is zero
  input  apost_t          r2_gamma,     // a-posteriori value read from RAM U
  input  col_t            r2_col,       // column of this lane
  input  comp_t           r2_comp_old,  // compressed c2v of this row, iteration k-1
  input  logic            r2_sign_old,  // sign of u of iteration k-1 (RAM S)
  input  logic [SAW-1:0]  r2_slot,
  // stage R3
  output logic            r3_sign,      // sign of u^(k,l), to RAM S
  output comp_t           comp_new,     // CNU A result
  // update phase
  input  logic            w0_v,
  input  logic [SAW-1:0]  w0_slot,
  input  col_t            w1_col,
  input  comp_t           w1_comp,      // compressed v^(k,l) of this row
  output apost_t          w2_gamma      // updated a-posteriori value
);
  // ---------------- check node phase ----------------
  msg_t   v_old_raw, v_old;
  apost_t av_old;

  cnu_b u_cnu_b (.comp(r2_comp_old), .col(r2_col), .v2c_sign(r2_sign_old), .c2v(v_old_raw));

  always_comb begin
    v_old = v_old_raw;
    if (r2_zero_old) v_old = '0;
  end

  alpha_scaler u_alpha_old (.v(v_old), .av(av_old));

  logic            r3_v, r3_first;
  logic [SAW-1:0]  r3_slot;
  col_t            r3_col;
  apost_t          r3_u;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r3_v <= 1'b0; r3_first <= 1'b0; r3_slot <= '0; r3_col <= '0; r3_u <= '0;
    end else begin
      r3_v     <= r2_v;
      r3_first <= r2_first;
      r3_slot  <= r2_slot;
      r3_col   <= r2_col;
      r3_u     <= sat_apost((PW+2)'(r2_gamma) - (PW+2)'(av_old));
    end
  end

  // v2c message for CNU A: round to integer, saturate magnitude to 2^q-1
  msg_t          v2c;
  logic [PW:0]   uabs, uint;
  always_comb begin
    uabs     = r3_u[PW-1] ? (PW+1)'(-(PW+1)'(r3_u)) : (PW+1)'(r3_u);
    uint     = (uabs + (PW+1)'(1 << (FRAC - 1))) >> FRAC;
    v2c.sign = r3_u[PW-1];
    v2c.mag  = (uint > (PW+1)'((1 << Q) - 1)) ? {Q{1'b1}} : Q'(uint);
  end
  assign r3_sign = r3_u[PW-1];

  cnu_a u_cnu_a (.clk, .rst_n, .en(r3_v), .first(r3_first), .v2c(v2c), .col(r3_col),
                 .comp(comp_new));

  // RAM T: u^(k,l) of every block of the layer
  apost_t t_rd;
  sdp_ram #(.DEPTH(NSLOT), .LANES(1), .LW(PW)) u_ram_t (
    .clk, .we(r3_v), .waddr(r3_slot), .wmask(1'b1), .wdata(r3_u),
    .re(w0_v), .raddr(w0_slot), .rdata(t_rd));

  // ---------------- update phase ----------------
  msg_t   v_new;
  apost_t av_new;
  cnu_b u_cnu_b_new (.comp(w1_comp), .col(w1_col), .v2c_sign(t_rd[PW-1]), .c2v(v_new));
  alpha_scaler u_alpha_new (.v(v_new), .av(av_new));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w2_gamma <= '0;
    else        w2_gamma <= sat_apost((PW+2)'(t_rd) + (PW+2)'(av_new));
  end
endmodule
