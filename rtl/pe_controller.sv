// pe_controller: sequencer of one processing element.
//
// CONV command (one filter over the PE's output tile):
//  * Synapse blocking / hierarchical reconfiguration. The receptive field of
//    nchunk 32-entry chunks (C*R*S/32) is cut into passes. A pass takes 32
//    chunks (1024 entries: both groups of all 16 lanes) while at least 32
//    remain, otherwise the largest power of two that fits (16, 8, ..., 1);
//    so 9 chunks run as a pass of 8 and a pass of 1. Passes are numbered by
//    iter.
//  * At the start of a pass the synapse lanes of both groups are loaded once
//    and reused for every output of the pass. For a pass of n <= 16 chunks
//    the adder tree is configured for groups of g = n lanes and one job
//    packs 16/n outputs (slots); for n = 32 an output takes two jobs (one per
//    group) whose sums are added.
//  * For each job the next computable outputs are taken from the address
//    generator (in the backward pass only those whose bitmap bit is set),
//    and the 16 lanes are loaded one per cycle with the neuron chunk and its
//    offset map. Jobs alternate between the two groups, so loading one group
//    overlaps computing the other.
//  * When all lanes are done with a group, its MAC sums go through the adder
//    tree; every slot's sum is added to the partial sum of earlier passes
//    (read from the buffer), and either written back as a partial sum or,
//    in the last pass, sent through the ReLU unit to the result port.
//  * Only positions in [start_pos, end_pos) are computed, for passes from
//    start_iter on. end_pos may be lowered while running (work
//    redistribution); progress is reported as <iter, pos>.
// ENCODE command: runs the non-zero encoder over enc_count chunks from
// enc_base and stores each chunk's offset map next to it.
// Follows the paper for blocking, reconfiguration and output-sparse
// scheduling; the pass rule for sizes above 32 chunks, the job/slot format,
// the partial-sum layout (out_base + pos*M/32 + m/32, value m%32) and all
// handshakes are this design's own.
module pe_controller
  import sparse_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic                cmd_encode,
  input  layer_cfg_t          cfg,
  input  logic [M_W-1:0]      m_idx,
  input  markers_t            mk,
  input  logic [ADDR_W-1:0]   enc_base,
  input  logic [ADDR_W-1:0]   enc_count,
  input  logic                upd_end_valid,
  input  logic [POS_W-1:0]    upd_end_pos,
  output logic                busy,
  output logic [ITER_W-1:0]   prog_iter,
  output logic [POS_W-1:0]    prog_pos,
  output logic [POS_W-1:0]    prog_end,
  output logic                prog_last,      // working on the last pass
  // address generation unit
  output logic                agu_init,
  input  logic                tbl_ready,
  input  logic [KCH_W-1:0]    nchunk,
  output logic [POS_W-1:0]    q_pos,
  output logic [POS_W-1:0]    q_end,
  input  logic                f_found,
  input  logic [POS_W-1:0]    f_pos,
  input  logic [3:0]          f_x,
  input  logic [3:0]          f_y,
  output logic [3:0]          a_x,
  output logic [3:0]          a_y,
  output logic [KCH_W-1:0]    a_k,
  input  logic [ADDR_W-1:0]   a_addr,
  // buffer
  output logic                ra_en,
  output logic [ADDR_W-1:0]   ra_addr,
  input  chunk_t              ra_data,
  input  nzmap_t              ra_map,
  output logic                w_en,
  output logic [ADDR_W-1:0]   w_addr,
  output logic [ENTRIES-1:0]  w_mask,
  output chunk_t              w_data,
  output logic                w_map_en,
  output nzmap_t              w_map,
  // encoder
  output logic                enc_start,
  output chunk_t              enc_din,
  input  logic                enc_done,
  input  nzmap_t              enc_map,
  // lanes
  output logic                ld_valid,
  output logic                ld_grp,
  output logic [3:0]          ld_lane,
  output chunk_t              ld_neur,
  output nzmap_t              ld_map,
  output logic                ld_empty,
  output logic                syn_valid,
  output logic                syn_grp,
  output logic [3:0]          syn_lane,
  output chunk_t              syn_data,
  output logic                commit_valid,
  output logic                commit_grp,
  output logic                release_valid,
  output logic                release_grp,
  input  logic [GROUPS-1:0]   grp_done,
  // adder tree
  output logic                tr_valid,
  output logic                tr_grp,         // group whose sums feed the tree
  output logic [2:0]          tr_lg,
  input  logic                tr_out_valid,
  input  fp16_t               tr_dout [LANES],
  // ReLU
  output fp16_t               relu_z,
  input  fp16_t               relu_y,
  input  logic                relu_nz,
  // results
  output logic                res_valid,
  input  logic                res_ready,
  output result_t             res,
  // statistics
  output logic [31:0]         n_jobs,
  output logic [31:0]         n_passes
);
  typedef enum logic [3:0] {
    S_IDLE, S_TBL, S_PASS, S_SYN, S_SCHED, S_LOAD, S_COMMIT, S_TREE,
    S_POST, S_PSUM, S_OUT, S_ENC_RD, S_ENC_GO, S_ENC_WAIT, S_DONE
  } state_e;

  typedef struct packed {
    logic [LANES-1:0]            valid;
    logic [LANES-1:0][POS_W-1:0] pos;
    logic                        half;
  } job_meta_t;

  state_e              st_q;
  logic [ITER_W-1:0]   iter_q;
  logic [KCH_W-1:0]    base_q;
  logic [POS_W-1:0]    cursor_q, end_q;
  logic                nxt_grp_q, p0_q;
  logic [4:0]          cnt_q;                // lane / synapse / slot counter
  logic [ADDR_W-1:0]   ea_q;                 // encoder address
  job_meta_t           meta_q [GROUPS];
  job_meta_t           cur_q;                // job being loaded
  logic [GROUPS-1:0]   pend_q;
  logic                post_grp_q;
  job_meta_t           post_q;
  fp16_t               tv_q [LANES];
  fp16_t               v_q, hold_q;
  // load pipeline (read issued this cycle, data delivered next cycle)
  logic                pl_v_q, pl_syn_q, pl_empty_q, pl_grp_q;
  logic [3:0]          pl_lane_q;

  // ---- pass parameters ----
  logic [KCH_W-1:0]    rem;
  logic [5:0]          n;            // chunks in this pass (1..32)
  logic [2:0]          lg;           // log2(min(n,16))
  logic                full;         // n == 32
  logic                first_pass, last_pass;
  logic [4:0]          nslots;       // outputs per job
  always_comb begin
    rem  = nchunk - base_q;
    full = rem >= KCH_W'(32);
    lg   = 3'd0;
    for (int b = 1; b <= 4; b++) if (rem >= KCH_W'(1 << b)) lg = 3'(b);
    n    = full ? 6'd32 : 6'(1 << lg);
    nslots = full ? 5'd1 : 5'(LANES >> lg);
    first_pass = (iter_q == '0);
    last_pass  = (base_q + KCH_W'(n)) >= nchunk;
  end

  // ---- lane being loaded ----
  logic [3:0]          lane;
  logic [3:0]          slot;
  logic                slot_first;
  logic                half;
  logic                lane_valid;
  logic [3:0]          lane_x, lane_y;
  logic [3:0]          s_x_q [LANES];
  logic [3:0]          s_y_q [LANES];
  always_comb begin
    lane       = cnt_q[3:0];
    slot       = full ? 4'd0 : 4'(lane >> lg);
    slot_first = full ? (lane == 4'd0) : ((lane & 4'((1 << lg) - 1)) == 4'd0);
    half       = nxt_grp_q ^ p0_q;
    q_pos      = cursor_q;
    // a lowered end marker applies in the cycle it arrives
    q_end      = (upd_end_valid && upd_end_pos < end_q) ? upd_end_pos : end_q;
    if (slot_first && !(full && half)) begin
      lane_valid = f_found;
      lane_x     = f_x;
      lane_y     = f_y;
    end else begin
      lane_valid = cur_q.valid[slot];
      lane_x     = s_x_q[slot];
      lane_y     = s_y_q[slot];
    end
    a_x = lane_x;
    a_y = lane_y;
    if (st_q == S_SYN)
      a_k = base_q + (full ? KCH_W'({cnt_q[4] ^ p0_q, cnt_q[3:0]})
                           : KCH_W'(cnt_q[3:0] & 4'((1 << lg) - 1)));
    else
      a_k = base_q + (full ? KCH_W'({half, lane})
                           : KCH_W'(lane & 4'((1 << lg) - 1)));
  end

  logic [ADDR_W-1:0] psum_addr;
  assign psum_addr = cfg.out_base + ADDR_W'(32'(post_q.pos[cnt_q[3:0]]) * 32'(cfg.mch))
                   + ADDR_W'(m_idx >> 5);

  // ---- outputs ----
  always_comb begin
    busy          = (st_q != S_IDLE);
    prog_iter     = iter_q;
    prog_pos      = cursor_q;
    prog_end      = end_q;
    prog_last     = last_pass && st_q != S_IDLE && st_q != S_TBL && st_q != S_PASS;
    ra_en         = 1'b0;
    ra_addr       = '0;
    w_en          = 1'b0;
    w_addr        = '0;
    w_mask        = '0;
    w_data        = '0;
    w_map_en      = 1'b0;
    w_map         = enc_map;
    enc_start     = 1'b0;
    enc_din       = ra_data;
    ld_valid      = pl_v_q && !pl_syn_q;
    ld_grp        = pl_grp_q;
    ld_lane       = pl_lane_q;
    ld_neur       = ra_data;
    ld_map        = ra_map;
    ld_empty      = pl_empty_q;
    syn_valid     = pl_v_q && pl_syn_q;
    syn_grp       = pl_grp_q;
    syn_lane      = pl_lane_q;
    syn_data      = ra_data;
    commit_valid  = 1'b0;
    commit_grp    = nxt_grp_q;
    release_valid = 1'b0;
    release_grp   = post_grp_q;
    tr_valid      = 1'b0;
    tr_grp        = (pend_q == 2'b11) ? nxt_grp_q : pend_q[1];   // oldest pending group
    tr_lg         = full ? 3'd4 : lg;
    relu_z        = v_q;
    res_valid     = 1'b0;
    res.x         = mk.org_x + COORD_W'(post_q.pos[cnt_q[3:0]] / POS_W'(MAX_TV));
    res.y         = mk.org_y + COORD_W'(post_q.pos[cnt_q[3:0]] % POS_W'(MAX_TV));
    res.m         = m_idx;
    res.value     = relu_y;
    res.nz        = relu_nz;
    case (st_q)
      S_SYN: begin
        ra_en   = 1'b1;
        ra_addr = cfg.syn_base + ADDR_W'(a_k);
      end
      S_SCHED: begin
        if (pend_q[tr_grp] && grp_done[tr_grp]) begin
          tr_valid      = 1'b1;
          release_valid = 1'b1;
          release_grp   = tr_grp;
        end
      end
      S_LOAD: begin
        ra_en   = lane_valid;
        ra_addr = a_addr;
      end
      S_COMMIT: commit_valid = 1'b1;
      S_POST: begin
        if (cnt_q < nslots && post_q.valid[cnt_q[3:0]] && !(full && !post_q.half) && !first_pass) begin
          ra_en   = 1'b1;
          ra_addr = psum_addr;
        end
      end
      S_OUT: begin
        if (!last_pass) begin
          w_en                 = 1'b1;
          w_addr               = psum_addr;
          w_mask[m_idx[4:0]]   = 1'b1;
          w_data[m_idx[4:0]]   = v_q;
        end else begin
          res_valid = 1'b1;
        end
      end
      S_ENC_RD: begin
        ra_en   = 1'b1;
        ra_addr = ea_q;
      end
      S_ENC_GO: enc_start = 1'b1;
      S_ENC_WAIT: begin
        if (enc_done) begin
          w_en     = 1'b1;
          w_addr   = ea_q;
          w_map_en = 1'b1;
        end
      end
      default: ;
    endcase
  end

  // ---- state machine ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      iter_q     <= '0;
      base_q     <= '0;
      cursor_q   <= '0;
      end_q      <= '0;
      nxt_grp_q  <= 1'b0;
      p0_q       <= 1'b0;
      cnt_q      <= '0;
      ea_q       <= '0;
      pend_q     <= '0;
      post_grp_q <= 1'b0;
      post_q     <= '0;
      cur_q      <= '0;
      v_q        <= '0;
      hold_q     <= '0;
      pl_v_q     <= 1'b0;
      pl_syn_q   <= 1'b0;
      pl_empty_q <= 1'b0;
      pl_grp_q   <= 1'b0;
      pl_lane_q  <= '0;
      n_jobs     <= '0;
      n_passes   <= '0;
      for (int g = 0; g < GROUPS; g++) meta_q[g] <= '0;
      for (int i = 0; i < LANES; i++) begin
        tv_q[i] <= '0; s_x_q[i] <= '0; s_y_q[i] <= '0;
      end
    end else begin
      pl_v_q <= 1'b0;
      if (upd_end_valid && upd_end_pos < end_q) end_q <= upd_end_pos;
      case (st_q)
        S_IDLE: if (start) begin
          if (cmd_encode) begin
            ea_q <= enc_base;
            cnt_q <= '0;
            st_q <= (enc_count == '0) ? S_DONE : S_ENC_RD;
          end else begin
            iter_q <= '0;
            base_q <= '0;
            end_q  <= mk.end_pos;
            st_q   <= S_TBL;
          end
        end
        S_TBL: if (tbl_ready && !agu_init) st_q <= S_PASS;
        S_PASS: begin
          if (base_q >= nchunk) st_q <= S_DONE;
          else if (iter_q < mk.start_iter) begin
            base_q <= base_q + KCH_W'(n);
            iter_q <= iter_q + 1'b1;
          end else begin
            cursor_q <= mk.start_pos;
            p0_q     <= nxt_grp_q;
            cnt_q    <= '0;
            n_passes <= n_passes + 1;
            st_q     <= S_SYN;
          end
        end
        S_SYN: begin
          pl_v_q     <= 1'b1;
          pl_syn_q   <= 1'b1;
          pl_grp_q   <= cnt_q[4];
          pl_lane_q  <= cnt_q[3:0];
          cnt_q      <= cnt_q + 1'b1;
          if (cnt_q == 5'd31) st_q <= S_SCHED;
        end
        S_SCHED: begin
          if (pend_q[tr_grp] && grp_done[tr_grp]) begin
            post_grp_q         <= tr_grp;
            post_q             <= meta_q[tr_grp];
            pend_q[tr_grp]     <= 1'b0;
            st_q               <= S_TREE;
          end else if (!pend_q[nxt_grp_q] && ((full && half) || f_found)) begin
            cnt_q      <= '0;
            cur_q.half <= half;
            if (!(full && half)) cur_q.valid <= '0;
            st_q       <= S_LOAD;
          end else if (pend_q == '0) begin
            base_q <= base_q + KCH_W'(n);
            iter_q <= iter_q + 1'b1;
            st_q   <= S_PASS;
          end
        end
        S_LOAD: begin
          if (slot_first && !(full && half)) begin
            cur_q.valid[slot] <= f_found;
            cur_q.pos[slot]   <= f_pos;
            s_x_q[slot]       <= f_x;
            s_y_q[slot]       <= f_y;
            if (f_found) cursor_q <= f_pos + 1'b1;
          end
          pl_v_q     <= 1'b1;
          pl_syn_q   <= 1'b0;
          pl_empty_q <= !lane_valid;
          pl_grp_q   <= nxt_grp_q;
          pl_lane_q  <= lane;
          cnt_q      <= cnt_q + 1'b1;
          if (lane == 4'd15) st_q <= S_COMMIT;
        end
        S_COMMIT: begin
          meta_q[nxt_grp_q] <= cur_q;
          pend_q[nxt_grp_q] <= 1'b1;
          nxt_grp_q         <= ~nxt_grp_q;
          n_jobs            <= n_jobs + 1;
          st_q              <= S_SCHED;
        end
        S_TREE: if (tr_out_valid) begin
          tv_q  <= tr_dout;
          cnt_q <= '0;
          st_q  <= S_POST;
        end
        S_POST: begin
          if (cnt_q >= nslots) begin
            st_q <= S_SCHED;                       // all slots of the job done
          end else if (!post_q.valid[cnt_q[3:0]]) begin
            cnt_q <= cnt_q + 1'b1;                 // slot without an output
          end else if (full && !post_q.half) begin
            hold_q <= tv_q[0];
            st_q   <= S_SCHED;
          end else begin
            v_q  <= (full && post_q.half) ? fp16_add(hold_q, tv_q[cnt_q[3:0]]) : tv_q[cnt_q[3:0]];
            st_q <= first_pass ? S_OUT : S_PSUM;
          end
        end
        S_PSUM: begin
          v_q  <= fp16_add(v_q, ra_data[m_idx[4:0]]);
          st_q <= S_OUT;
        end
        S_OUT: begin
          if (!last_pass || res_ready) begin
            st_q  <= S_POST;
            cnt_q <= cnt_q + 1'b1;
          end
        end
        S_ENC_RD: st_q <= S_ENC_GO;
        S_ENC_GO: st_q <= S_ENC_WAIT;
        S_ENC_WAIT: if (enc_done) begin
          ea_q <= ea_q + 1'b1;
          cnt_q <= '0;
          st_q <= (ea_q + 1'b1 == enc_base + enc_count) ? S_DONE : S_ENC_RD;
        end
        S_DONE: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // agu_init is raised in the first cycle of S_TBL
  logic tbl_first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tbl_first_q <= 1'b0;
    else        tbl_first_q <= (st_q == S_IDLE) && start && !cmd_encode;
  end
  assign agu_init = tbl_first_q;
endmodule
