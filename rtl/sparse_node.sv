// sparse_node: top level - one accelerator node.
//
// A TX x TY grid of processing elements (16 x 16 = 256 by default) around a
// central node controller with the work redistribution unit, connected by an
// H-tree. Each PE computes one U/TX x V/TY tile of the output map of the
// current filter; filters are broadcast one at a time. In the forward pass
// every output is computed, ReLU is applied and the output bitmap bit is
// returned with each result; in the backward pass only outputs whose bitmap
// bit is set are computed (output sparsity), and in both passes zero inputs
// are skipped through the non-zero offset maps (input sparsity).
// Ports: start and a layer descriptor; a DRAM chunk-read port (one read
// outstanding); a result stream (global x, y, filter, value, bitmap bit);
// aggregate statistics for observing the mechanisms at work.
module sparse_node
  import sparse_pkg::*;
#(
  parameter int unsigned TX         = 16,
  parameter int unsigned TY         = 16,
  parameter int unsigned THRESH_PCT = 30
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  layer_desc_t   desc,
  output logic          busy,
  // DRAM
  output logic          dram_req,
  output logic [31:0]   dram_addr,
  input  logic          dram_rsp_valid,
  input  chunk_t        dram_rsp_data,
  // results
  output logic          res_valid,
  input  logic          res_ready,
  output result_t       res,
  // statistics
  output logic [31:0]   n_redist,     // work redistributions
  output logic [31:0]   n_jobs,       // lane-group jobs, all PEs
  output logic [31:0]   n_passes,     // blocking passes, all PEs
  output logic [31:0]   n_stall,      // stalled lane-cycles, all PEs
  output logic [31:0]   n_busy        // lane-cycles on non-zero entries, all PEs
);
  localparam int unsigned NPE    = TX * TY;
  localparam int unsigned LEVELS = ($clog2(NPE) + 1) / 2;

  // H-tree
  logic wr_valid, rd_req, rd_valid, xw_map_en;
  tree_wr_t wr;
  logic [7:0] rd_pe;
  logic [ADDR_W-1:0] rd_addr, xw_addr, xr_addr;
  chunk_t rd_data, xw_data;
  nzmap_t rd_map, xw_map;
  logic [NPE-1:0] xw_en, bm_wr, xr_en;
  chunk_t xr_data [NPE];
  nzmap_t xr_map  [NPE];
  // PE control
  logic [NPE-1:0] pe_start, pe_busy, pe_last, upd_end_valid, avail;
  logic pe_cmd_encode;
  markers_t pe_mk [NPE];
  logic [ITER_W-1:0] prog_iter [NPE];
  logic [POS_W-1:0]  prog_pos  [NPE];
  logic [POS_W-1:0]  prog_end  [NPE];
  logic [POS_W-1:0]  upd_end_pos;
  logic [M_W-1:0] cur_m;
  // WDU
  logic req_valid, req_ready;
  logic [7:0] req_src, req_tgt;
  logic [POS_W-1:0] req_mid, req_end;
  logic [ITER_W-1:0] req_iter;
  // results, statistics
  logic [NPE-1:0] pe_res_valid, pe_res_ready;
  result_t pe_res [NPE];
  logic [31:0] s_jobs [NPE];
  logic [31:0] s_passes [NPE];
  logic [31:0] s_stall [NPE];
  logic [31:0] s_busy [NPE];

  node_controller #(.NPE(NPE), .TY(TY), .LEVELS(LEVELS)) u_nc (
    .clk, .rst_n, .start, .desc, .busy, .cur_m,
    .dram_req, .dram_addr, .dram_rsp_valid, .dram_rsp_data,
    .wr_valid, .wr, .rd_req, .rd_pe, .rd_addr, .rd_valid, .rd_data, .rd_map,
    .pe_start, .pe_cmd_encode, .pe_mk, .pe_busy,
    .avail, .req_valid, .req_ready, .req_src, .req_tgt, .req_mid, .req_end, .req_iter,
    .pe_res_valid, .pe_res_ready, .pe_res, .res_valid, .res_ready, .res
  );

  htree #(.NPE(NPE), .LEVELS(LEVELS)) u_tree (
    .clk, .rst_n,
    .wr_valid, .wr, .rd_req, .rd_pe, .rd_addr, .rd_valid, .rd_data, .rd_map,
    .xw_en, .bm_wr, .xw_addr, .xw_data, .xw_map_en, .xw_map,
    .xr_en, .xr_addr, .xr_data, .xr_map
  );

  wdu #(.NPE(NPE), .THRESH_PCT(THRESH_PCT)) u_wdu (
    .clk, .rst_n,
    .enable (desc.redist_en),
    .tile_pos (POS_W'(desc.cfg.tu * desc.cfg.tv)),
    .avail, .busy (pe_busy), .last (pe_last),
    .iter (prog_iter), .pos (prog_pos), .endp (prog_end),
    .req_valid, .req_ready, .req_src, .req_tgt, .req_mid, .req_end, .req_iter,
    .upd_end_valid, .upd_end_pos, .n_redist
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe u_pe (
      .clk, .rst_n,
      .start (pe_start[p]), .cmd_encode (pe_cmd_encode), .cfg (desc.cfg),
      .m_idx (cur_m), .mk (pe_mk[p]),
      .enc_base (desc.cfg.neur_base), .enc_count (desc.in_chunks),
      .upd_end_valid (upd_end_valid[p]), .upd_end_pos,
      .busy (pe_busy[p]), .prog_iter (prog_iter[p]), .prog_pos (prog_pos[p]),
      .prog_end (prog_end[p]), .prog_last (pe_last[p]),
      .bm_wr (bm_wr[p]), .bm_data (MAX_POS'(xw_data)),
      .xw_en (xw_en[p]), .xw_addr, .xw_mask ('1), .xw_data, .xw_map_en, .xw_map,
      .xr_en (xr_en[p]), .xr_addr, .xr_data (xr_data[p]), .xr_map (xr_map[p]),
      .res_valid (pe_res_valid[p]), .res_ready (pe_res_ready[p]), .res (pe_res[p]),
      .n_jobs (s_jobs[p]), .n_passes (s_passes[p]), .n_stall (s_stall[p]), .n_busy (s_busy[p])
    );
  end

  always_comb begin
    n_jobs = '0; n_passes = '0; n_stall = '0; n_busy = '0;
    for (int p = 0; p < NPE; p++) begin
      n_jobs   = n_jobs   + s_jobs[p];
      n_passes = n_passes + s_passes[p];
      n_stall  = n_stall  + s_stall[p];
      n_busy   = n_busy   + s_busy[p];
    end
  end
endmodule
