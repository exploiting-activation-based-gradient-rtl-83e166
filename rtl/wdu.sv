// wdu: work distribution (redistribution) unit of the node.
//
// Tracks every PE tile by its progress tuple <iter, pos> (pass number and the
// next output position it will take) against its end marker. A tile that has
// reached its end markers and is free (avail, given by the node controller)
// is a source. Among the busy tiles, the one with the lexicographically
// smallest <iter, pos> - the least progress, hence the most work left - is
// the target. Its remaining positions [pos, end) are halved: the target
// keeps the lower half (its end marker is lowered to mid at once through
// upd_end) and the source is to compute [mid, end).
// A request is only made when the remaining work of the target is at least
// THRESH_PCT percent of a full tile (tile_pos positions), since moving data
// and merging results costs time, and only while the target is in its last
// pass, so that all partial sums the source needs already exist in the
// target's buffer and can be copied.
// The request (src, tgt, mid, end, iter) is held until the node controller
// accepts it (req_ready), which performs the copy and starts the source.
// Follows the paper for the tuple, the selection rule, the halving and the
// 30 % threshold; the last-pass restriction and the handshake are this
// design's own.
module wdu
  import sparse_pkg::*;
#(
  parameter int unsigned NPE        = 256,
  parameter int unsigned THRESH_PCT = 30
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic [POS_W-1:0]         tile_pos,     // output positions per tile
  input  logic [NPE-1:0]           avail,        // finished and free PEs
  input  logic [NPE-1:0]           busy,
  input  logic [NPE-1:0]           last,         // PE is in its last pass
  input  logic [ITER_W-1:0]        iter  [NPE],
  input  logic [POS_W-1:0]         pos   [NPE],
  input  logic [POS_W-1:0]         endp  [NPE],
  output logic                     req_valid,
  input  logic                     req_ready,
  output logic [7:0]               req_src,
  output logic [7:0]               req_tgt,
  output logic [POS_W-1:0]         req_mid,
  output logic [POS_W-1:0]         req_end,
  output logic [ITER_W-1:0]        req_iter,
  output logic [NPE-1:0]           upd_end_valid,
  output logic [POS_W-1:0]         upd_end_pos,
  output logic [31:0]              n_redist
);
  logic                have_src, have_tgt;
  logic [7:0]          src, tgt;
  logic [POS_W-1:0]    rem;

  always_comb begin
    have_src = 1'b0;
    src      = '0;
    for (int p = NPE - 1; p >= 0; p--)
      if (avail[p]) begin have_src = 1'b1; src = 8'(p); end
    have_tgt = 1'b0;
    tgt      = '0;
    for (int p = 0; p < NPE; p++) begin
      if (busy[p] && last[p] && endp[p] > pos[p] &&
          (32'(endp[p] - pos[p]) * 100 >= 32'(tile_pos) * THRESH_PCT) &&
          (!have_tgt || {iter[p], pos[p]} < {iter[tgt], pos[tgt]})) begin
        have_tgt = 1'b1;
        tgt      = 8'(p);
      end
    end
    rem       = endp[tgt] - pos[tgt];
    req_valid = enable && have_src && have_tgt && rem >= POS_W'(2);
    req_src   = src;
    req_tgt   = tgt;
    req_mid   = pos[tgt] + (rem >> 1) + POS_W'(rem[0]);   // target keeps the lower half
    req_end   = endp[tgt];
    req_iter  = iter[tgt];
  end

  // the target's end marker drops to the midpoint in the accepting cycle
  always_comb begin
    upd_end_pos = req_mid;
    for (int p = 0; p < NPE; p++)
      upd_end_valid[p] = req_valid && req_ready && req_tgt == 8'(p);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      n_redist <= '0;
    else if (req_valid && req_ready) n_redist <= n_redist + 1;
  end
endmodule
