// apost_mem -- a-posteriori memory of the L-parallel decoder: RAM U0 and
// RAM U1, the registers for the last block column of each submatrix, the
// shifter and the reverse shifter.
//
// Organisation. Columns of each submatrix are grouped in block columns of
// LANES consecutive columns. Even block columns live in bank U0 and odd ones
// in bank U1, floor(r/(2L)) words per submatrix and bank, so any LANES
// consecutive columns sit in two consecutive block columns, one per bank,
// and are read in one cycle. For a corner column c the U1 address is
// c >> log2(2L) and the U0 address is that plus bit log2(L) of c. The
// r - 2L*floor(r/(2L)) columns at the end of each submatrix do not form a
// full bank pair; they are held in registers ("tail" registers). A block
// may run into the tail and past column r-1, wrapping to column 0; the
// wrapped lanes then take block column 0 from U0 (its address is forced to
// the submatrix base). Lanes in the tail or wrapped are picked per lane
// next to the shifter output; this per-lane selection is this design's own
// way of handling blocks at the submatrix edge.
//
// Read (decoding): present rd_a with rd_en in one cycle, rd_gamma holds the
// LANES values starting at rd_a in the next cycle (combinational from the
// RAM outputs and the tail registers).
// Write (decoding): wr_a, wr_lane and wr_gamma in one cycle; values are in
// memory at the next edge. Only lanes set in wr_lane are written (per-lane
// write enables after the reverse shifter), so the other half of the two
// words is never rewritten with a stale copy.
// Load: one block column of channel bits per cycle, mapped to +C/-C.
// Read-out: one block column of hard decisions (sign bits), one cycle later.
// Load and read-out must not be used while decoding.
module apost_mem
  import mdpc_pkg::*;
#(
  parameter int NSUB  = mdpc_pkg::N0,
  parameter int RSZ   = mdpc_pkg::R,
  parameter int LANES = mdpc_pkg::L,
  parameter int NBLK  = (RSZ + LANES - 1) / LANES,  // block columns per submatrix
  parameter int BCW   = $clog2(NBLK)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // decoding read
  input  logic                    rd_en,
  input  col_t                    rd_a,
  output apost_t [LANES-1:0]      rd_gamma,
  output logic                    rd_tail,    // a lane of the read used a tail register
  output logic                    rd_wrap,    // a lane of the read wrapped past column r-1
  // decoding write
  input  logic                    wr_en,
  input  col_t                    wr_a,
  input  logic [LANES-1:0]        wr_lane,
  input  apost_t [LANES-1:0]      wr_gamma,
  // channel load
  input  logic                    ld_en,
  input  logic [SCW-1:0]          ld_sub,
  input  logic [BCW-1:0]          ld_blk,
  input  logic [LANES-1:0]        ld_bits,
  // hard-decision read-out
  input  logic                    ro_en,
  input  logic [SCW-1:0]          ro_sub,
  input  logic [BCW-1:0]          ro_blk,
  output logic [LANES-1:0]        ro_bits
);
  localparam int HALF  = RSZ / (2 * LANES);   // words per submatrix and bank
  localparam int NB    = 2 * HALF;            // block columns held in U0/U1
  localparam int NU    = NB * LANES;          // columns held in U0/U1
  localparam int TL    = RSZ - NU;            // tail columns per submatrix
  localparam int TLR   = (TL > 0) ? TL : 1;
  localparam int DEPTH = NSUB * HALF;
  localparam int AW    = $clog2(DEPTH);
  localparam int LG    = $clog2(LANES);
  localparam int SW2   = $clog2(2 * LANES);

  typedef logic [AW-1:0] uaddr_t;

  // bank addresses for a block whose corner is column a
  function automatic void bank_addr(input col_t a, output uaddr_t a0, output uaddr_t a1);
    uaddr_t base;
    logic [LCW-1:0] bcol;
    base = uaddr_t'(a.sub) * uaddr_t'(HALF);
    bcol = a.loc >> LG;
    a1   = base + uaddr_t'(a.loc >> (LG + 1));
    if (a.loc >= LCW'(NU))                 a0 = base;       // starts in the tail
    else if (!bcol[0])                     a0 = a1;
    else if (bcol + 1 >= LCW'(NB))         a0 = base;       // next block column wraps
    else                                   a0 = a1 + 1'b1;
  endfunction

  // ---------------- banks ----------------
  logic                          u0_we, u1_we;
  uaddr_t                        u0_wa, u1_wa, u0_ra, u1_ra;
  logic [LANES-1:0]              u0_wm, u1_wm;
  apost_t [LANES-1:0]            u0_wd, u1_wd, u0_rd, u1_rd;

  sdp_ram #(.DEPTH(DEPTH), .LANES(LANES), .LW(PW)) u_ram_u0 (
    .clk, .we(u0_we), .waddr(u0_wa), .wmask(u0_wm), .wdata(u0_wd),
    .re(rd_en | ro_en), .raddr(u0_ra), .rdata(u0_rd));
  sdp_ram #(.DEPTH(DEPTH), .LANES(LANES), .LW(PW)) u_ram_u1 (
    .clk, .we(u1_we), .waddr(u1_wa), .wmask(u1_wm), .wdata(u1_wd),
    .re(rd_en | ro_en), .raddr(u1_ra), .rdata(u1_rd));

  apost_t tail [NSUB][TLR];

  // ---------------- read side ----------------
  col_t            rq_a;          // corner of the block being read (R2)
  logic [BCW-1:0]  rq_blk;

  always_comb begin
    uaddr_t a0, a1;
    col_t   ra;
    ra = rd_a;
    if (ro_en) begin
      ra.sub = ro_sub;
      ra.loc = LCW'(ro_blk) << LG;
    end
    bank_addr(ra, a0, a1);
    if (ro_en) a0 = a1;           // read-out wants block column ro_blk in either bank
    u0_ra = a0;
    u1_ra = a1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_a   <= '0;
      rq_blk <= '0;
    end else if (rd_en | ro_en) begin
      rq_a   <= rd_a;
      rq_blk <= ro_blk;
      if (ro_en) rq_a.sub <= ro_sub;
    end
  end

  apost_t [LANES-1:0] sh_g, sh_h;
  shifter #(.L(LANES), .DW(PW)) u_shifter (
    .g(u0_rd), .h(u1_rd), .s(rq_a.loc[SW2-1:0]), .g_o(sh_g), .h_o(sh_h));

  always_comb begin
    logic [LCW:0] cm;
    rd_tail = 1'b0;
    rd_wrap = 1'b0;
    for (int m = 0; m < LANES; m++) begin
      cm = {1'b0, rq_a.loc} + (LCW+1)'(m);
      if (cm < (LCW+1)'(NU)) begin
        rd_gamma[m] = sh_g[m];
      end else if (cm < (LCW+1)'(RSZ)) begin
        rd_gamma[m] = tail[rq_a.sub][cm - (LCW+1)'(NU)];
        rd_tail     = 1'b1;
      end else begin
        rd_gamma[m] = u0_rd[cm - (LCW+1)'(RSZ)];
        rd_wrap     = 1'b1;
      end
    end
  end

  // read-out: sign bits of block column rq_blk
  always_comb begin
    logic [LCW:0] cm;
    for (int m = 0; m < LANES; m++) begin
      cm = ((LCW+1)'(rq_blk) << LG) + (LCW+1)'(m);
      if (cm < (LCW+1)'(NU))       ro_bits[m] = rq_blk[0] ? u1_rd[m][PW-1] : u0_rd[m][PW-1];
      else if (cm < (LCW+1)'(RSZ)) ro_bits[m] = tail[rq_a.sub][cm - (LCW+1)'(NU)][PW-1];
      else                         ro_bits[m] = 1'b0;
    end
  end

  // ---------------- write side ----------------
  logic [LANES-1:0]   main_m, rm0, rm1;
  apost_t [LANES-1:0] rw0, rw1;

  always_comb begin
    logic [LCW:0] cm;
    for (int m = 0; m < LANES; m++) begin
      cm        = {1'b0, wr_a.loc} + (LCW+1)'(m);
      main_m[m] = wr_lane[m] && (cm < (LCW+1)'(NU));
    end
  end

  rev_shifter #(.L(LANES), .DW(PW)) u_rev_shifter (
    .g(wr_gamma), .h('0), .s(wr_a.loc[SW2-1:0]), .g_o(rw0), .h_o(rw1));
  rev_shifter #(.L(LANES), .DW(1)) u_rev_mask (
    .g(main_m), .h('0), .s(wr_a.loc[SW2-1:0]), .g_o(rm0), .h_o(rm1));

  always_comb begin
    uaddr_t a0, a1;
    logic [LCW:0] cm;
    cm = '0;
    bank_addr(wr_a, a0, a1);
    u0_we = 1'b0;  u1_we = 1'b0;
    u0_wa = a0;    u1_wa = a1;
    u0_wm = rm0;   u1_wm = rm1;
    u0_wd = rw0;   u1_wd = rw1;
    if (ld_en) begin
      a1 = uaddr_t'(ld_sub) * uaddr_t'(HALF) + uaddr_t'(ld_blk >> 1);
      u0_wa = a1;  u1_wa = a1;
      u0_wm = '1;  u1_wm = '1;
      for (int m = 0; m < LANES; m++) begin
        u0_wd[m] = chan_value(ld_bits[m]);
        u1_wd[m] = chan_value(ld_bits[m]);
      end
      u0_we = (ld_blk < BCW'(NB)) && !ld_blk[0];
      u1_we = (ld_blk < BCW'(NB)) &&  ld_blk[0];
    end else if (wr_en) begin
      // lanes that wrapped past column r-1 go to block column 0 in U0
      for (int m = 0; m < LANES; m++) begin
        cm = {1'b0, wr_a.loc} + (LCW+1)'(m);
        if (wr_lane[m] && cm >= (LCW+1)'(RSZ)) begin
          u0_wd[cm - (LCW+1)'(RSZ)] = wr_gamma[m];
          u0_wm[cm - (LCW+1)'(RSZ)] = 1'b1;
        end
      end
      u0_we = |u0_wm;
      u1_we = |u1_wm;
    end
  end

  // tail registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSUB; i++)
        for (int t = 0; t < TLR; t++) tail[i][t] <= '0;
    end else if (ld_en) begin
      for (int m = 0; m < LANES; m++) begin
        logic [LCW:0] cm;
        cm = ((LCW+1)'(ld_blk) << LG) + (LCW+1)'(m);
        if (cm >= (LCW+1)'(NU) && cm < (LCW+1)'(RSZ))
          tail[ld_sub][cm - (LCW+1)'(NU)] <= chan_value(ld_bits[m]);
      end
    end else if (wr_en) begin
      for (int m = 0; m < LANES; m++) begin
        logic [LCW:0] cm;
        cm = {1'b0, wr_a.loc} + (LCW+1)'(m);
        if (wr_lane[m] && cm >= (LCW+1)'(NU) && cm < (LCW+1)'(RSZ))
          tail[wr_a.sub][cm - (LCW+1)'(NU)] <= wr_gamma[m];
      end
    end
  end
endmodule
