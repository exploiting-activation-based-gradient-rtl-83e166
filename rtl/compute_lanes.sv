// compute_lanes: the 16 computation lanes of a PE with double buffering.
//
// Each lane owns, per buffer group (0 and 1), three register lanes of 32
// entries: neuron values, the non-zero offset map of those neurons, and
// synapse (filter) values; and one MAC unit. Once a group is committed, each
// lane reads its offset register sequentially; every offset selects a neuron
// and the synapse at the same position, and the MAC accumulates their product
// - one non-zero entry per lane per cycle, zero neurons are never visited.
// With in_sparse = 0 all 32 entries are visited (dense input).
//
// Lanes are decoupled: a lane that has finished its entries of one group goes
// straight on to the other group if that group has been committed, and only
// stalls when it has not (lane stall). A group is complete when every lane is
// done with it; its 16 MAC sums are then read by the adder tree, after which
// the controller releases the group and may reload it. Synapse registers are
// kept across commits, so a filter block is loaded once and reused for many
// outputs. Group order is 0,1,0,1,... for every lane.
//
// Interface: ld_* writes one lane's neurons and offset map into a released
// group (one lane per cycle, 84 B); syn_* writes one lane's synapses;
// commit_* arms a group and clears its accumulators; grp_done[g] is high while
// group g is complete and not yet released; release_* frees it.
// Follows the paper's lane organisation (16 lanes, 32 entries, two groups,
// offset-indexed neuron/synapse reads); the handshake is this design's own.
module compute_lanes
  import sparse_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_sparse,
  // neuron + offset load
  input  logic                 ld_valid,
  input  logic                 ld_grp,
  input  logic [3:0]           ld_lane,
  input  chunk_t               ld_neur,
  input  nzmap_t               ld_map,
  input  logic                 ld_empty,    // lane has no output in this job
  // synapse load
  input  logic                 syn_valid,
  input  logic                 syn_grp,
  input  logic [3:0]           syn_lane,
  input  chunk_t               syn_data,
  // group control
  input  logic                 commit_valid,
  input  logic                 commit_grp,
  input  logic                 release_valid,
  input  logic                 release_grp,
  output logic [GROUPS-1:0]    grp_ready,
  output logic [GROUPS-1:0]    grp_done,
  output fp16_t                acc [GROUPS][LANES],
  output logic [4:0]           stalled_lanes,  // lanes idle while another lane works
  output logic [4:0]           busy_lanes
);
  chunk_t  neur [LANES][GROUPS];
  chunk_t  syn  [LANES][GROUPS];
  nzmap_t  nzm  [LANES][GROUPS];
  logic [GROUPS-1:0] empty_q [LANES];

  logic [GROUPS-1:0]   ready_q;
  logic [GROUPS-1:0]   ldone_q [LANES];   // lane done with group
  logic                cur_q   [LANES];   // group the lane works on
  logic [CNT_W-1:0]    ptr_q   [LANES];

  logic                act   [LANES];
  logic [CNT_W-1:0]    cnt   [LANES];
  off_t                idx   [LANES];
  logic [LANES-1:0]    mac_en;
  fp16_t               mac_a [LANES];
  fp16_t               mac_b [LANES];
  logic [GROUPS-1:0]   clr;

  assign grp_ready = ready_q;
  assign clr = commit_valid ? (GROUPS'(1) << commit_grp) : '0;

  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      grp_done[g] = ready_q[g];
      for (int l = 0; l < LANES; l++)
        if (!ldone_q[l][g]) grp_done[g] = 1'b0;
    end
    stalled_lanes = '0;
    busy_lanes    = '0;
    for (int l = 0; l < LANES; l++) begin
      act[l]    = ready_q[cur_q[l]] && !ldone_q[l][cur_q[l]];
      cnt[l]    = empty_q[l][cur_q[l]] ? '0 :
                  in_sparse ? nzm[l][cur_q[l]].cnt : CNT_W'(ENTRIES);
      idx[l]    = in_sparse ? nzm[l][cur_q[l]].idx[ptr_q[l][OFF_W-1:0]] : ptr_q[l][OFF_W-1:0];
      mac_en[l] = act[l] && (ptr_q[l] < cnt[l]);
      mac_a[l]  = neur[l][cur_q[l]][idx[l]];
      mac_b[l]  = syn[l][cur_q[l]][idx[l]];
      if (act[l]) busy_lanes = busy_lanes + 5'd1;
    end
    if (busy_lanes != 0) stalled_lanes = 5'(LANES) - busy_lanes;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_mac
    fp16_mac u_mac (
      .clk, .rst_n,
      .en  (mac_en[l]),
      .grp (cur_q[l]),
      .a   (mac_a[l]),
      .b   (mac_b[l]),
      .clr (clr),
      .acc ('{acc[0][l], acc[1][l]})
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready_q <= '0;
      for (int l = 0; l < LANES; l++) begin
        ldone_q[l] <= '0;
        cur_q[l]   <= 1'b0;
        ptr_q[l]   <= '0;
      end
    end else begin
      for (int l = 0; l < LANES; l++) begin
        if (act[l]) begin
          if (ptr_q[l] + 1'b1 >= cnt[l]) begin
            ldone_q[l][cur_q[l]] <= 1'b1;
            cur_q[l]             <= ~cur_q[l];
            ptr_q[l]             <= '0;
          end else begin
            ptr_q[l] <= ptr_q[l] + 1'b1;
          end
        end
      end
      if (release_valid) ready_q[release_grp] <= 1'b0;
      if (commit_valid) begin
        ready_q[commit_grp] <= 1'b1;
        for (int l = 0; l < LANES; l++) ldone_q[l][commit_grp] <= 1'b0;
      end
    end
  end

  // register files (no reset: always written before a group is committed)
  always_ff @(posedge clk) begin
    if (ld_valid) begin
      neur[ld_lane][ld_grp] <= ld_neur;
      nzm[ld_lane][ld_grp]  <= ld_map;
      empty_q[ld_lane][ld_grp] <= ld_empty;
    end
    if (syn_valid) syn[syn_lane][syn_grp] <= syn_data;
  end

  // a group may only be (re)loaded or committed while it is released
  a_ld_free:     assert property (@(posedge clk) disable iff (!rst_n) ld_valid |-> !ready_q[ld_grp]);
  a_commit_free: assert property (@(posedge clk) disable iff (!rst_n) commit_valid |-> !ready_q[commit_grp]);
endmodule
