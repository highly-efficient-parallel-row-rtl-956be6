// alpha_scaler -- scalar multiplier alpha * v for one c2v message.
//
// alpha has AFW fractional digits of which at most two are nonzero, each +1
// or -1: alpha = AD1*2^-AE1 + AD2*2^-AE2 (default 2^-2 - 2^-5 = 0.21875).
// The magnitude is multiplied exactly with two shifts and one add, then
// rounded to FRAC fractional bits (round half up on the magnitude) and the
// sign is applied. The output is in a-posteriori units (LSB = 2^-FRAC) so it
// can be added to or subtracted from an a-posteriori value directly.
// Purely combinational.
module alpha_scaler
  import mdpc_pkg::*;
(
  input  msg_t   v,    // c2v message
  output apost_t av    // alpha * v, FRAC fractional bits
);
  localparam int PRW = Q + AFW + 2;
  localparam int SH  = AFW - FRAC;             // bits dropped by rounding

  logic signed [PRW-1:0] mag, t1, t2, prod, rnd;

  always_comb begin
    mag  = PRW'(v.mag);
    t1   = mag <<< (AFW - AE1);
    t2   = mag <<< (AFW - AE2);
    prod = (AD1 > 0 ? t1 : (AD1 < 0 ? -t1 : '0))
         + (AD2 > 0 ? t2 : (AD2 < 0 ? -t2 : '0));
    rnd  = (prod + PRW'(1 <<< (SH - 1))) >>> SH;
    av   = v.sign ? -apost_t'(rnd) : apost_t'(rnd);
  end
endmodule
