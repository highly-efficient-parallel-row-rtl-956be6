// sdp_ram -- simple dual-port RAM (one write port, one read port) with a
// write enable per lane, used for RAM M, RAM S, RAM T and the RAM U banks.
//
// A word holds LANES entries of LW bits. Writes take effect at the clock
// edge for the lanes whose wmask bit is set; reads are synchronous: rdata
// holds mem[raddr] one cycle after re. A read of the address being written
// in the same cycle returns the old word. The array is not reset.
//
// The published decoder names these memories and gives their sizes (the
// default parameters are those of RAM M for n0 = 2, r = 4801, L = 2: 2401
// words of 2 x 23 bits); the per-lane write mask and the read enable that
// holds the output register are choices of this design.
module sdp_ram #(
  parameter int DEPTH = (mdpc_pkg::R + mdpc_pkg::L - 1) / mdpc_pkg::L,  // RAM M: ceil(r/L) words
  parameter int LANES = mdpc_pkg::L,                                   // L rows per word
  parameter int LW    = mdpc_pkg::COMPW,                               // 2q+1+14 bits per row
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [AW-1:0]               waddr,
  input  logic [LANES-1:0]            wmask,
  input  logic [LANES-1:0][LW-1:0]    wdata,
  input  logic                        re,
  input  logic [AW-1:0]               raddr,
  output logic [LANES-1:0][LW-1:0]    rdata
);
  logic [LANES-1:0][LW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < LANES; i++)
        if (wmask[i]) mem[waddr][i] <= wdata[i];
    end
    if (re) rdata <= mem[raddr];
  end
endmodule
