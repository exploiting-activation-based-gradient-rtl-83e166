// node_controller: central controller of the node ("PE and I/O interface").
//
// Runs one layer on the PE grid:
//  1. streams every PE's input tile (with halo) from DRAM into its buffer
//     over the H-tree and lets all PEs encode it (non-zero offset maps);
//  2. for each of the M filters: broadcasts the filter from DRAM to all PEs,
//     in the backward pass sends every PE the output bitmap slice of its tile
//     for this filter, starts all PEs and waits until they are done;
//  3. while a filter runs, serves requests of the work redistribution unit:
//     the target's tile data and partial sums (copy_chunks chunks with their
//     offset maps) are copied over the H-tree into the second area of the
//     source's buffer (offset copy_chunks), the target's bitmap is sent to the
//     source, and the source is started on the upper half of the target's
//     remaining positions, with the target's tile origin.
// Results of all PEs are merged onto one result port by a round-robin
// arbiter; each result carries its global coordinates and filter number, so
// results of redistributed work need no further merging.
// DRAM port: one outstanding chunk read (req, then rsp_valid with data).
// The sequence follows the paper's mapping (tiles per PE, filters streamed
// and broadcast one at a time, bitmaps from DRAM in the backward pass);
// the copy protocol and port timing are this design's own.
module node_controller
  import sparse_pkg::*;
#(
  parameter int unsigned NPE    = 256,
  parameter int unsigned TY     = 16,     // PEs per grid row
  parameter int unsigned LEVELS = 4       // H-tree levels (write/read latency)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_desc_t          desc,
  output logic                 busy,
  output logic [M_W-1:0]       cur_m,
  // DRAM
  output logic                 dram_req,
  output logic [31:0]          dram_addr,
  input  logic                 dram_rsp_valid,
  input  chunk_t               dram_rsp_data,
  // H-tree root
  output logic                 wr_valid,
  output tree_wr_t             wr,
  output logic                 rd_req,
  output logic [7:0]           rd_pe,
  output logic [ADDR_W-1:0]    rd_addr,
  input  logic                 rd_valid,
  input  chunk_t               rd_data,
  input  nzmap_t               rd_map,
  // PE control
  output logic [NPE-1:0]       pe_start,
  output logic                 pe_cmd_encode,
  output markers_t             pe_mk [NPE],
  input  logic [NPE-1:0]       pe_busy,
  // work redistribution unit
  output logic [NPE-1:0]       avail,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [7:0]           req_src,
  input  logic [7:0]           req_tgt,
  input  logic [POS_W-1:0]     req_mid,
  input  logic [POS_W-1:0]     req_end,
  input  logic [ITER_W-1:0]    req_iter,
  // results
  input  logic [NPE-1:0]       pe_res_valid,
  output logic [NPE-1:0]       pe_res_ready,
  input  result_t              pe_res [NPE],
  output logic                 res_valid,
  input  logic                 res_ready,
  output result_t              res
);
  typedef enum logic [3:0] {
    N_IDLE, N_IN, N_IN_WAIT, N_ENC, N_ENC_WAIT, N_W, N_W_WAIT, N_BM, N_BM_WAIT,
    N_DRAIN, N_RUN, N_CP, N_CP_BM, N_CP_BM_WAIT, N_CP_START
  } nstate_e;

  nstate_e             st_q, after_drain_q;
  layer_desc_t         d_q;
  logic [7:0]          p_q;                 // PE counter
  logic [ADDR_W-1:0]   i_q;                 // chunk counter (reads issued)
  logic [ADDR_W-1:0]   wi_q;                // chunk counter (writes done)
  logic [M_W-1:0]      m_q;
  logic [3:0]          drain_q;
  logic [NPE-1:0]      reserved_q;
  logic [7:0]          src_q, tgt_q;
  logic [POS_W-1:0]    mid_q, end_q;
  logic [ITER_W-1:0]   iter_q;
  logic [KCH_W-1:0]    nchunk;
  logic [7:0]          rr_q;                // round-robin pointer

  assign nchunk = KCH_W'(d_q.cfg.r) * KCH_W'(d_q.cfg.s) * KCH_W'(d_q.cfg.cch);
  assign busy   = (st_q != N_IDLE);
  assign cur_m  = m_q;

  function automatic markers_t own_markers(int p);
    markers_t mk;
    mk.start_iter = '0;
    mk.start_pos  = '0;
    mk.end_pos    = POS_W'(MAX_POS);
    mk.org_x      = COORD_W'((p / TY) * int'(d_q.cfg.tu));
    mk.org_y      = COORD_W'((p % TY) * int'(d_q.cfg.tv));
    mk.boff       = '0;
    return mk;
  endfunction

  // ---- combinational outputs ----
  always_comb begin
    dram_req      = 1'b0;
    dram_addr     = '0;
    wr_valid      = 1'b0;
    wr            = '0;
    rd_req        = 1'b0;
    rd_pe         = tgt_q;
    rd_addr       = pe_mk[tgt_q].boff + i_q;
    pe_start      = '0;
    pe_cmd_encode = (st_q == N_ENC);
    req_ready     = 1'b0;
    case (st_q)
      N_IN: begin
        dram_req  = 1'b1;
        dram_addr = d_q.in_base + 32'(p_q) * 32'(d_q.in_chunks) + 32'(i_q);
      end
      N_IN_WAIT: if (dram_rsp_valid) begin
        wr_valid = 1'b1;
        wr.dst   = p_q;
        wr.addr  = d_q.cfg.neur_base + i_q;
        wr.data  = dram_rsp_data;
      end
      N_ENC: pe_start = '1;
      N_W: begin
        dram_req  = 1'b1;
        dram_addr = d_q.w_base + 32'(m_q) * 32'(nchunk) + 32'(i_q);
      end
      N_W_WAIT: if (dram_rsp_valid) begin
        wr_valid = 1'b1;
        wr.bcast = 1'b1;
        wr.addr  = d_q.cfg.syn_base + i_q;
        wr.data  = dram_rsp_data;
      end
      N_BM, N_CP_BM: begin
        dram_req  = 1'b1;
        dram_addr = d_q.bm_base + 32'(m_q) * 32'(NPE) + 32'(st_q == N_BM ? p_q : tgt_q);
      end
      N_BM_WAIT, N_CP_BM_WAIT: if (dram_rsp_valid) begin
        wr_valid = 1'b1;
        wr.is_bm = 1'b1;
        wr.dst   = (st_q == N_BM_WAIT) ? p_q : src_q;
        wr.data  = dram_rsp_data;
      end
      N_DRAIN: if (drain_q == 0 && after_drain_q == N_RUN) pe_start = '1;
      N_RUN: req_ready = req_valid && d_q.redist_en;
      N_CP: begin
        rd_req = (i_q < d_q.copy_chunks);
        if (rd_valid) begin
          wr_valid  = 1'b1;
          wr.dst    = src_q;
          wr.addr   = d_q.copy_chunks + wi_q;
          wr.data   = rd_data;
          wr.map_en = 1'b1;
          wr.map    = rd_map;
        end
      end
      N_CP_START: if (drain_q == 0) pe_start[src_q] = 1'b1;
      default: ;
    endcase
    for (int p = 0; p < NPE; p++)
      avail[p] = (st_q == N_RUN) && d_q.redist_en && !pe_busy[p] && !reserved_q[p];
  end

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= N_IDLE; after_drain_q <= N_IDLE; d_q <= '0;
      p_q <= '0; i_q <= '0; wi_q <= '0; m_q <= '0; drain_q <= '0;
      reserved_q <= '0; src_q <= '0; tgt_q <= '0; mid_q <= '0; end_q <= '0; iter_q <= '0;
      for (int p = 0; p < NPE; p++) pe_mk[p] <= '0;
    end else begin
      for (int p = 0; p < NPE; p++)
        if (pe_busy[p]) reserved_q[p] <= 1'b0;
      case (st_q)
        N_IDLE: if (start) begin
          d_q <= desc; p_q <= '0; i_q <= '0; m_q <= '0;
          st_q <= (desc.in_chunks == '0) ? N_ENC : N_IN;
        end
        N_IN: st_q <= N_IN_WAIT;
        N_IN_WAIT: if (dram_rsp_valid) begin
          st_q <= N_IN;
          if (i_q + 1'b1 == d_q.in_chunks) begin
            i_q <= '0;
            if (p_q == 8'(NPE - 1)) begin
              drain_q <= 4'(LEVELS + 1); after_drain_q <= N_ENC; st_q <= N_DRAIN;
            end
            p_q <= p_q + 1'b1;
          end else i_q <= i_q + 1'b1;
        end
        N_ENC: begin
          drain_q <= 4'd2; after_drain_q <= N_ENC_WAIT; st_q <= N_DRAIN;
        end
        N_ENC_WAIT: if (pe_busy == '0) begin
          i_q <= '0; st_q <= N_W;
        end
        N_W: st_q <= N_W_WAIT;
        N_W_WAIT: if (dram_rsp_valid) begin
          st_q <= N_W;
          if (i_q + 1'b1 == ADDR_W'(nchunk)) begin
            i_q <= '0; p_q <= '0;
            if (d_q.cfg.mode == MODE_BP) st_q <= N_BM;
            else begin drain_q <= 4'(LEVELS + 1); after_drain_q <= N_RUN; st_q <= N_DRAIN; end
          end else i_q <= i_q + 1'b1;
        end
        N_BM: st_q <= N_BM_WAIT;
        N_BM_WAIT: if (dram_rsp_valid) begin
          st_q <= N_BM;
          if (p_q == 8'(NPE - 1)) begin
            drain_q <= 4'(LEVELS + 1); after_drain_q <= N_RUN; st_q <= N_DRAIN;
          end
          p_q <= p_q + 1'b1;
        end
        N_DRAIN: begin
          if (drain_q != 0) drain_q <= drain_q - 1'b1;
          else              st_q <= after_drain_q;
          // markers settle one cycle before the PEs are started
          if (drain_q == 4'd1 && after_drain_q == N_RUN)
            for (int p = 0; p < NPE; p++) pe_mk[p] <= own_markers(p);
        end
        N_RUN: begin
          if (req_valid && d_q.redist_en) begin
            src_q <= req_src; tgt_q <= req_tgt; mid_q <= req_mid; end_q <= req_end;
            iter_q <= req_iter;
            reserved_q[req_src] <= 1'b1;
            i_q <= '0; wi_q <= '0;
            st_q <= N_CP;
          end else if (pe_busy == '0 && reserved_q == '0) begin
            if (m_q + 1'b1 == d_q.nfilt) st_q <= N_IDLE;
            else begin
              m_q <= m_q + 1'b1; i_q <= '0; st_q <= N_W;
            end
          end
        end
        N_CP: begin
          if (i_q < d_q.copy_chunks) i_q <= i_q + 1'b1;
          if (rd_valid) begin
            wi_q <= wi_q + 1'b1;
            if (wi_q + 1'b1 == d_q.copy_chunks)
              st_q <= (d_q.cfg.mode == MODE_BP) ? N_CP_BM : N_CP_START;
          end
          drain_q <= 4'(LEVELS + 1);
        end
        N_CP_BM: st_q <= N_CP_BM_WAIT;
        N_CP_BM_WAIT: if (dram_rsp_valid) begin
          drain_q <= 4'(LEVELS + 1); st_q <= N_CP_START;
        end
        N_CP_START: begin
          if (drain_q != 0) drain_q <= drain_q - 1'b1;
          else begin
            st_q <= N_RUN;
          end
          if (drain_q == 1) begin
            pe_mk[src_q].start_iter <= iter_q;
            pe_mk[src_q].start_pos  <= mid_q;
            pe_mk[src_q].end_pos    <= end_q;
            pe_mk[src_q].org_x      <= pe_mk[tgt_q].org_x;
            pe_mk[src_q].org_y      <= pe_mk[tgt_q].org_y;
            pe_mk[src_q].boff       <= d_q.copy_chunks;
          end
        end
        default: st_q <= N_IDLE;
      endcase
    end
  end

  // ---- result arbiter (round robin) ----
  logic        found;
  logic [7:0]  gnt;
  always_comb begin
    found = 1'b0;
    gnt   = '0;
    for (int k = 0; k < NPE; k++) begin
      int p;
      p = (int'(rr_q) + k) % NPE;   // candidate PE
      if (!found && pe_res_valid[p]) begin found = 1'b1; gnt = 8'(p); end
    end
    res_valid = found;
    res       = pe_res[gnt];
    for (int p = 0; p < NPE; p++) pe_res_ready[p] = found && res_ready && gnt == 8'(p);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     rr_q <= '0;
    else if (res_valid && res_ready) rr_q <= 8'((int'(gnt) + 1) % NPE);
  end
endmodule
