// ram_i -- RAM I: column indices of the identity-block corners of one layer
// (n0*w entries of ceil(log2(n0 r)) bits).
//
// Loaded through the write port with the corners of layer 0 before decoding;
// during decoding the same entries are overwritten with the shifted indices
// of the next layer. Two synchronous read ports: port A serves the check
// node phase and port B the a-posteriori update phase, which runs one layer
// behind. Read data appear one cycle after the address. Not reset.
//
// Contents and size follow the published design; the second read port (the
// update phase needs the corners of the previous layer while the current
// layer is read) is this design's choice.
module ram_i
  import mdpc_pkg::*;
#(
  parameter int DEPTH = mdpc_pkg::N0 * mdpc_pkg::W,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  col_t          wdata,
  input  logic [AW-1:0] raddr_a,
  output col_t          rdata_a,
  input  logic [AW-1:0] raddr_b,
  output col_t          rdata_b
);
  col_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end
endmodule
