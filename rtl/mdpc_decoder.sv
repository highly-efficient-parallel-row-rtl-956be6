// mdpc_decoder -- L-parallel row-layered scaled Min-sum decoder for QC-MDPC
// codes with H = [H_0 | ... | H_{n0-1}], each H_i an r x r circulant of
// column weight w, constrained so that any two nonzero entries of a
// circulant's first column are at least L apart (circularly).
//
// Under that constraint, rows lL..lL+L-1 (layer l) of each circulant are
// covered by w L x L identity blocks whose corners lie on row lL. One
// identity block is processed per cycle by L lanes, one lane per row; a
// layer takes n0*w blocks. RAM I holds the corner columns of the current
// layer (loaded for layer 0, shifted by L mod r after each layer). RAM U0/U1
// and the tail registers (apost_mem) hold the a-posteriori values; RAM M
// holds the compressed c2v messages of each layer (L rows per word), RAM S
// the v2c signs of every block, and each lane has its RAM T.
//
// Pipeline of the check node stream (slot j of layer l):
//   R0 RAM I port A and RAM S read      R1 RAM U read (corner from RAM I)
//   R2 shifter, CNU B, v2c              R3 RAM T / RAM S write, CNU A
// Update stream (slot j of the previous layer), one layer behind:
//   W0 RAM I port B and RAM T read      W1 CNU B', gamma + alpha*v, RAM I
//   W2 reverse shifter, RAM U write        write-back of the shifted corner
// The compressed results of a layer go to RAM M and to a holding register
// (the "D" register in front of CNU B') at the end of its period.
//
// Host interface (only while not busy): hi_* loads the n0*w layer-0 corner
// columns, sorted ascending within each submatrix, submatrix 0 first;
// ld_* loads the received word, one block column of L bits per cycle;
// ro_* reads the decoded word back the same way (bits one cycle later).
// start begins decoding; done rises when it ends, with success and the
// number of iterations. Assertions flag host accesses while busy and
// corners loaded out of order.
//
// Timing: with T = n0*w + 7 cycles per layer and NL = ceil(r/L) layers,
// 'done' rises (iterations*NL + 1)*T + 1 cycles after 'start' on success and
// (IMAXP*NL + 1)*T + 1 on failure. The memories, the two CNU parts, the
// shifters and the dynamic identity-block division follow the published
// architecture; the 7 extra cycles per layer, the stopping test, the
// write masks on RAM U, C = 9 and the host interface are this design's own.
module mdpc_decoder
  import mdpc_pkg::*;
#(
  parameter int NSUB  = mdpc_pkg::N0,
  parameter int RSZ   = mdpc_pkg::R,
  parameter int WCOL  = mdpc_pkg::W,
  parameter int LANES = mdpc_pkg::L,
  parameter int IMAXP = mdpc_pkg::IMAX,
  parameter int NSLOT = NSUB * WCOL,
  parameter int NLAY  = (RSZ + LANES - 1) / LANES,
  parameter int SAW   = $clog2(NSLOT),
  parameter int BCW   = $clog2(NLAY),
  parameter int ITW   = $clog2(IMAXP + 2)
) (
  input  logic              clk,
  input  logic              rst_n,
  // H matrix nonzero entry indices (layer-0 identity block corners)
  input  logic              hi_we,
  input  logic [SAW-1:0]    hi_addr,
  input  col_t              hi_col,
  // received word, one block column per cycle
  input  logic              ld_en,
  input  logic [SCW-1:0]    ld_sub,
  input  logic [BCW-1:0]    ld_blk,
  input  logic [LANES-1:0]  ld_bits,
  // decoded word read-out
  input  logic              ro_en,
  input  logic [SCW-1:0]    ro_sub,
  input  logic [BCW-1:0]    ro_blk,
  output logic [LANES-1:0]  ro_bits,
  // control and status
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              success,
  output logic [ITW-1:0]    iters
);
  localparam int LYW = $clog2(NLAY);
  localparam int SDEPTH = NLAY * NSLOT;
  localparam int SAWS   = $clog2(SDEPTH);

  // ---------------- controller ----------------
  logic              rd_issue, rd_first, rd_zero_old, m_rd, layer_done;
  logic [SAW-1:0]    rd_slot, wr_slot;
  logic [LYW-1:0]    rd_layer, wr_layer;
  logic [LANES-1:0]  rd_lanes, wr_lanes;
  logic              wr_issue, eval, clear, eval_success, flip;
  logic [LCW-1:0]    wr_delta;

  dec_ctrl #(.RSZ(RSZ), .LANES(LANES), .NSLOT(NSLOT), .IMAXP(IMAXP)) u_ctrl (
    .clk, .rst_n, .start, .eval_success, .busy, .done, .success, .iters,
    .rd_issue, .rd_slot, .rd_layer, .rd_first, .rd_zero_old, .rd_lanes, .m_rd, .layer_done,
    .wr_issue, .wr_slot, .wr_layer, .wr_lanes, .wr_delta, .eval, .clear);

  // ---------------- stage registers ----------------
  typedef struct packed {
    logic              v;
    logic [SAW-1:0]    slot;
    logic [LYW-1:0]    layer;
    logic              first;
    logic              zero_old;
    logic [LANES-1:0]  lanes;
  } rtag_t;

  typedef struct packed {
    logic              v;
    logic [SAW-1:0]    slot;
    logic [LANES-1:0]  lanes;
    logic [LCW-1:0]    delta;
  } wtag_t;

  rtag_t r1, r2, r3;
  wtag_t w1, w2;
  col_t  a_w2;
  logic [LANES-1:0] s_old_r2;

  // ---------------- RAM I ----------------
  col_t ia, ib, i_wdata, ib_next;
  logic i_we;
  logic [SAW-1:0] i_waddr;

  h_shift #(.RR(RSZ)) u_h_shift (.a(ib), .delta(w1.delta), .a_next(ib_next));

  always_comb begin
    i_we    = hi_we | w1.v;
    i_waddr = hi_we ? hi_addr : w1.slot;
    i_wdata = hi_we ? hi_col  : ib_next;
  end

  ram_i #(.DEPTH(NSLOT)) u_ram_i (
    .clk, .we(i_we), .waddr(i_waddr), .wdata(i_wdata),
    .raddr_a(rd_slot), .rdata_a(ia), .raddr_b(wr_slot), .rdata_b(ib));

  // ---------------- RAM S ----------------
  logic [LANES-1:0] s_rd, s_wd;
  logic [SAWS-1:0]  s_ra, s_wa;
  always_comb begin
    s_ra = SAWS'(rd_layer) * SAWS'(NSLOT) + SAWS'(rd_slot);
    s_wa = SAWS'(r3.layer) * SAWS'(NSLOT) + SAWS'(r3.slot);
  end
  sdp_ram #(.DEPTH(SDEPTH), .LANES(LANES), .LW(1)) u_ram_s (
    .clk, .we(r3.v), .waddr(s_wa), .wmask('1), .wdata(s_wd),
    .re(rd_issue), .raddr(s_ra), .rdata(s_rd));

  // ---------------- RAM M and the D register ----------------
  comp_t [LANES-1:0] comp_old, comp_new, comp_hold;
  sdp_ram #(.DEPTH(NLAY), .LANES(LANES), .LW(COMPW)) u_ram_m (
    .clk, .we(layer_done), .waddr(rd_layer), .wmask('1), .wdata(comp_new),
    .re(m_rd), .raddr(rd_layer), .rdata(comp_old));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          comp_hold <= '0;
    else if (layer_done) comp_hold <= comp_new;
  end

  // ---------------- a-posteriori memory ----------------
  apost_t [LANES-1:0] gamma_rd, gamma_wr;
  logic               rd_tail, rd_wrap;

  apost_mem #(.NSUB(NSUB), .RSZ(RSZ), .LANES(LANES), .NBLK(NLAY), .BCW(BCW)) u_apost (
    .clk, .rst_n,
    .rd_en(r1.v), .rd_a(ia), .rd_gamma(gamma_rd), .rd_tail, .rd_wrap,
    .wr_en(w2.v), .wr_a(a_w2), .wr_lane(w2.lanes), .wr_gamma(gamma_wr),
    .ld_en, .ld_sub, .ld_blk, .ld_bits,
    .ro_en, .ro_sub, .ro_blk, .ro_bits);

  // ---------------- pipeline registers ----------------
  col_t a_r2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0; r2 <= '0; r3 <= '0; w1 <= '0; w2 <= '0;
      a_r2 <= '0; a_w2 <= '0; s_old_r2 <= '0;
    end else begin
      r1 <= '{v: rd_issue, slot: rd_slot, layer: rd_layer, first: rd_first,
              zero_old: rd_zero_old, lanes: rd_lanes};
      r2 <= r1;
      r3 <= r2;
      a_r2     <= ia;
      s_old_r2 <= s_rd;
      w1 <= '{v: wr_issue, slot: wr_slot, lanes: wr_lanes, delta: wr_delta};
      w2 <= w1;
      a_w2 <= ib;
    end
  end

  // ---------------- lanes ----------------
  logic [LANES-1:0] r3_sign, r3_hd;
  logic [LANES-1:0] r3_hd_d;

  for (genvar m = 0; m < LANES; m++) begin : g_lane
    layer_lane #(.NSLOT(NSLOT)) u_lane (
      .clk, .rst_n,
      .r2_v(r2.v && r2.lanes[m]), .r2_first(r2.first), .r2_zero_old(r2.zero_old),
      .r2_gamma(gamma_rd[m]), .r2_col(lane_col(a_r2, m, RSZ)),
      .r2_comp_old(comp_old[m]), .r2_sign_old(s_old_r2[m]), .r2_slot(r2.slot),
      .r3_sign(r3_sign[m]), .comp_new(comp_new[m]),
      .w0_v(wr_issue), .w0_slot(wr_slot),
      .w1_col(lane_col(ib, m, RSZ)), .w1_comp(comp_hold[m]),
      .w2_gamma(gamma_wr[m]));
    assign r3_hd[m] = gamma_rd[m][PW-1];
  end
  assign s_wd = r3_sign;

  // sign of the values read, aligned with stage R3
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r3_hd_d <= '0;
    else        r3_hd_d <= r3_hd;
  end

  // ---------------- stopping test ----------------
  logic [LANES-1:0] w2_hd;
  always_comb
    for (int m = 0; m < LANES; m++) w2_hd[m] = gamma_wr[m][PW-1];

  term_check #(.NSLOT(NSLOT), .LANES(LANES)) u_term (
    .clk, .rst_n, .clear,
    .r3_v(r3.v), .r3_first(r3.first), .r3_slot(r3.slot), .r3_lanes(r3.lanes), .r3_hd(r3_hd_d),
    .layer_done, .first_layer(rd_layer == '0), .last_layer(rd_layer == LYW'(NLAY - 1)),
    .w2_v(w2.v), .w2_slot(w2.slot), .w2_lanes(w2.lanes), .w2_hd(w2_hd),
    .eval, .success(eval_success), .flip);

  // host interface rules: RAM I, the word and the read-out port belong to
  // the decoder while it is busy, and the layer-0 corners of each submatrix
  // must arrive in ascending order (the schedule relies on it)
  col_t hi_prev;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_prev <= '0;
    end else begin
      if (hi_we) hi_prev <= hi_col;
      if (busy)
        assert (!(hi_we || ld_en || ro_en || start))
          else $error("host access while the decoder is busy");
      if (hi_we && hi_addr != '0 && hi_col.sub == hi_prev.sub)
        assert (hi_col.loc > hi_prev.loc)
          else $error("layer-0 corners not ascending within a submatrix");
    end
  end
endmodule
