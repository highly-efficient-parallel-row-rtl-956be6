// dec_ctrl -- layer and iteration scheduler of the decoder.
//
// Decoding runs in periods of T = NSLOT + RD_OFS + 4 cycles, one per layer
// (NSLOT = n0*w identity blocks per layer, one block per cycle). In each
// period two streams are issued, as in the published schedule where the
// a-posteriori update of layer l overlaps the check node processing of
// layer l+1:
//   update stream    slot j of the previous layer at cycle j
//   check node stream slot j of the current layer at cycle RD_OFS + j
// The check node stream trails the update stream by RD_OFS = 3 cycles, so
// the block that follows block j (in ascending column order within its
// submatrix, the only block of the previous layer that can share columns
// with block j of the current layer) has been written back before block j is
// read. This offset and the 4 trailing cycles that let CNU A finish are
// this design's additions; the published figure of merit counts n0*w cycles
// per layer.
// The last layer has only r - (ceil(r/L)-1)*L rows; its lanes above that
// are disabled. After the last layer of iteration k, the update of that
// layer happens in period 0 of iteration k+1; at the end of that period the
// stopping test of iteration k is evaluated ('eval'). Decoding ends on
// success or after IMAXP iterations (one extra update-only period).
module dec_ctrl
  import mdpc_pkg::*;
#(
  parameter int RSZ    = mdpc_pkg::R,
  parameter int LANES  = mdpc_pkg::L,
  parameter int NSLOT  = mdpc_pkg::N0 * mdpc_pkg::W,
  parameter int IMAXP  = mdpc_pkg::IMAX,
  parameter int NLAY   = (RSZ + LANES - 1) / LANES,
  parameter int SAW    = $clog2(NSLOT),
  parameter int LYW    = $clog2(NLAY),
  parameter int ITW    = $clog2(IMAXP + 2)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              eval_success,  // stopping test result, sampled at eval
  output logic              busy,
  output logic              done,          // decoding finished (held until start)
  output logic              success,       // a codeword was found
  output logic [ITW-1:0]    iters,         // iterations performed
  // check node stream, stage R0
  output logic              rd_issue,
  output logic [SAW-1:0]    rd_slot,
  output logic [LYW-1:0]    rd_layer,
  output logic              rd_first,
  output logic              rd_zero_old,
  output logic [LANES-1:0]  rd_lanes,
  output logic              m_rd,          // read RAM M for the current layer
  output logic              layer_done,    // CNU A results of the current layer ready
  // update stream, stage W0
  output logic              wr_issue,
  output logic [SAW-1:0]    wr_slot,
  output logic [LYW-1:0]    wr_layer,
  output logic [LANES-1:0]  wr_lanes,
  output logic [LCW-1:0]    wr_delta,      // column shift to the next layer
  output logic              eval,
  output logic              clear          // new codeword: clear stopping state
);
  localparam int RD_OFS = 3;
  localparam int T      = NSLOT + RD_OFS + 4;
  localparam int CW     = $clog2(T);
  localparam int LREM   = RSZ - (NLAY - 1) * LANES;   // rows of the last layer

  logic [CW-1:0]  cnt;
  logic [LYW-1:0] layer;
  logic [ITW-1:0] iter;
  logic           drain, has_rd, has_wr, eval_now;

  function automatic logic [LANES-1:0] lanes_of(input logic [LYW-1:0] ly);
    return (ly == LYW'(NLAY - 1)) ? LANES'((1 << LREM) - 1) : '1;
  endfunction

  assign has_rd   = busy && !drain;
  assign has_wr   = busy && !(layer == '0 && iter == ITW'(1));
  assign eval_now = busy && cnt == CW'(T - 1) && ((layer == '0 && iter > ITW'(1)) || drain);

  always_comb begin
    rd_issue    = has_rd && cnt >= CW'(RD_OFS) && cnt < CW'(RD_OFS + NSLOT);
    rd_slot     = SAW'(cnt - CW'(RD_OFS));
    rd_layer    = layer;
    rd_first    = cnt == CW'(RD_OFS);
    rd_zero_old = iter == ITW'(1);
    rd_lanes    = lanes_of(layer);
    m_rd        = has_rd && cnt == '0;
    layer_done  = has_rd && cnt == CW'(T - 1);
    wr_issue    = has_wr && cnt < CW'(NSLOT);
    wr_slot     = SAW'(cnt);
    wr_layer    = (layer == '0) ? LYW'(NLAY - 1) : layer - 1'b1;
    wr_lanes    = lanes_of(wr_layer);
    wr_delta    = (wr_layer == LYW'(NLAY - 1)) ? LCW'(LREM) : LCW'(LANES);
    eval        = eval_now;
    clear       = start && !busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; success <= 1'b0; iters <= '0;
      cnt <= '0; layer <= '0; iter <= '0; drain <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; done <= 1'b0; success <= 1'b0; iters <= '0;
        cnt <= '0; layer <= '0; iter <= ITW'(1); drain <= 1'b0;
      end
    end else if (cnt != CW'(T - 1)) begin
      cnt <= cnt + 1'b1;
    end else if (eval_now && (eval_success || drain)) begin
      busy    <= 1'b0;
      done    <= 1'b1;
      success <= eval_success;
      iters   <= iter - 1'b1;
    end else begin
      cnt <= '0;
      if (layer == LYW'(NLAY - 1)) begin
        layer <= '0;
        iter  <= iter + 1'b1;
        if (iter == ITW'(IMAXP)) drain <= 1'b1;
      end else begin
        layer <= layer + 1'b1;
      end
    end
  end
endmodule
