// mdpc_pkg -- shared constants, message types and arithmetic helpers of the
// L-parallel row-layered Min-sum QC-MDPC decoder.
//
// Code and precision defaults follow the example the decoder is evaluated on:
// a QC-MDPC code with n0 = 2 circulants of size r = 4801 and row weight
// w = 45 per circulant, 2-parallel processing, q = 4-bit c2v/v2c magnitudes,
// channel value C = 9 and at most 30 iterations. The a-posteriori value is a
// 9-bit integer (sign + 8 magnitude bits) extended by 2 fractional bits, that
// is p + 1 = 11 bits, and the scalar is alpha = 0.21875 = 2^-2 - 2^-5.
//
// Design choices of this implementation (not fixed by the published
// architecture): a-posteriori and v2c values are two's complement rather
// than sign-magnitude (same width); a column index is stored as
// {submatrix number, column inside the submatrix}, which for n0 = 2 and
// r = 4801 is the same 14 bits as ceil(log2(n0*r)).
package mdpc_pkg;

  // ---- code and architecture defaults ----
  parameter int N0   = 2;      // number of circulant submatrices
  parameter int R    = 4801;   // circulant size (prime)
  parameter int W    = 45;     // column weight of each circulant
  parameter int L    = 2;      // parallelism (rows per layer)
  parameter int IMAX = 30;     // maximum number of decoding iterations

  // ---- message precision ----
  parameter int Q    = 4;      // c2v / v2c magnitude bits
  parameter int FRAC = 2;      // fractional bits of scaled c2v and a-posteriori
  parameter int PW   = 11;     // a-posteriori width (p+1), incl. FRAC bits
  parameter int CH   = 9;      // channel reliability magnitude C

  // ---- scalar alpha = D1*2^-E1 + D2*2^-E2 (at most two nonzero digits) ----
  parameter int AFW  = 6;      // fractional digits of alpha
  parameter int AE1  = 2;
  parameter int AD1  = 1;
  parameter int AE2  = 5;
  parameter int AD2  = -1;

  // ---- column index encoding ----
  parameter int LCW  = $clog2(R);                 // column inside a submatrix
  parameter int SCW  = (N0 > 1) ? $clog2(N0) : 1; // submatrix number
  parameter int IDXW = SCW + LCW;                 // full column index

  typedef logic signed [PW-1:0] apost_t;

  typedef struct packed {
    logic [SCW-1:0] sub;
    logic [LCW-1:0] loc;
  } col_t;

  // one c2v or v2c message: sign ('1' = negative) and magnitude
  typedef struct packed {
    logic         sign;
    logic [Q-1:0] mag;
  } msg_t;

  // compressed c2v messages of one row (RAM M entry per row)
  typedef struct packed {
    logic         s;
    logic [Q-1:0] min1;
    logic [Q-1:0] min2;
    col_t         idx;
  } comp_t;

  localparam int COMPW = $bits(comp_t);           // 2q+1+ceil(log2(n0 r)) = 23

  localparam logic signed [PW-1:0] APOST_MAX = {1'b0, {(PW-1){1'b1}}};
  localparam logic signed [PW-1:0] APOST_MIN = {1'b1, {(PW-1){1'b0}}};

  localparam logic signed [PW+1:0] SAT_HI = (PW+2)'((1 <<< (PW-1)) - 1);
  localparam logic signed [PW+1:0] SAT_LO = -(PW+2)'(1 <<< (PW-1));

  // saturate a wider signed value to the a-posteriori range
  function automatic apost_t sat_apost(input logic signed [PW+1:0] x);
    if (x > SAT_HI) return APOST_MAX;
    if (x < SAT_LO) return APOST_MIN;
    return apost_t'(x);
  endfunction

  // channel value +C ('0') or -C ('1') in a-posteriori units
  function automatic apost_t chan_value(input logic bit_in);
    apost_t c;
    c = apost_t'(CH <<< FRAC);
    return bit_in ? -c : c;
  endfunction

  // column of lane m of an identity block whose corner is column a: the
  // block's columns are consecutive and wrap around inside the submatrix
  function automatic col_t lane_col(input col_t a, input int m, input int rsz);
    col_t c;
    logic [LCW:0] s;
    s     = {1'b0, a.loc} + (LCW+1)'(m);
    c.sub = a.sub;
    c.loc = (s >= (LCW+1)'(rsz)) ? LCW'(s - (LCW+1)'(rsz)) : LCW'(s);
    return c;
  endfunction

endpackage
