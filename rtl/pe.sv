// pe: one processing element of the node.
//
// Contains the local SRAM buffer, the PE controller with its address
// generation unit, the 16 double-buffered computation lanes with their MAC
// units, the reconfigurable adder tree, the ReLU unit and the non-zero
// encoder, wired as in the paper's PE organisation: buffer -> register lanes
// -> MACs -> adder tree -> ReLU -> buffer / result port; register lanes ->
// encoder -> buffer (offset maps).
// External ports: a write port and a read port into the buffer for the
// H-tree (writes are only accepted while the PE is idle), the output bitmap
// load, the command (start, CONV or ENCODE, layer configuration, filter
// number, work markers), the end-marker update from the work redistribution
// unit, progress for that unit, the result stream and statistics counters.
// The pool unit of the paper is not included (its function is not given).
module pe
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
  output logic                prog_last,
  // output bitmap
  input  logic                bm_wr,
  input  logic [MAX_POS-1:0]  bm_data,
  // buffer access from the interconnect
  input  logic                xw_en,
  input  logic [ADDR_W-1:0]   xw_addr,
  input  logic [ENTRIES-1:0]  xw_mask,
  input  chunk_t              xw_data,
  input  logic                xw_map_en,
  input  nzmap_t              xw_map,
  input  logic                xr_en,
  input  logic [ADDR_W-1:0]   xr_addr,
  output chunk_t              xr_data,
  output nzmap_t              xr_map,
  // results
  output logic                res_valid,
  input  logic                res_ready,
  output result_t             res,
  // statistics
  output logic [31:0]         n_jobs,
  output logic [31:0]         n_passes,
  output logic [31:0]         n_stall,      // lane-cycles lost to lane stalls
  output logic [31:0]         n_busy        // lane-cycles spent on non-zero entries
);
  // buffer
  logic ra_en, w_en, w_map_en, cw_en, cw_map_en;
  logic [ADDR_W-1:0] ra_addr, w_addr, cw_addr;
  chunk_t ra_data, w_data, cw_data;
  nzmap_t ra_map, w_map, cw_map;
  logic [ENTRIES-1:0] w_mask, cw_mask;
  // agu
  logic agu_init, tbl_ready, f_found;
  logic [KCH_W-1:0] nchunk, a_k;
  logic [POS_W-1:0] q_pos, q_end, f_pos;
  logic [3:0] f_x, f_y, a_x, a_y;
  logic [ADDR_W-1:0] a_addr;
  // encoder
  logic enc_start, enc_busy, enc_done;
  chunk_t enc_din;
  nzmap_t enc_map;
  // lanes
  logic ld_valid, ld_grp, ld_empty, syn_valid, syn_grp;
  logic commit_valid, commit_grp, release_valid, release_grp;
  logic [3:0] ld_lane, syn_lane;
  chunk_t ld_neur, syn_data;
  nzmap_t ld_map, ld_map_l;
  logic [GROUPS-1:0] grp_ready, grp_done;
  fp16_t acc [GROUPS][LANES];
  logic [4:0] stalled_lanes, busy_lanes;
  // tree / relu
  logic tr_valid, tr_grp, tr_out_valid;
  logic [2:0] tr_lg;
  fp16_t tr_dout [LANES];
  fp16_t relu_z, relu_y;
  logic relu_nz;

  // a PE working on redistributed work reads its tile and partial sums from
  // the area the copy was placed in
  layer_cfg_t cfg_eff;
  always_comb begin
    cfg_eff = cfg;
    cfg_eff.neur_base = cfg.neur_base + mk.boff;
    cfg_eff.out_base  = cfg.out_base + mk.boff;
  end

  // the interconnect owns the write port while the PE is idle
  always_comb begin
    if (busy) begin
      w_en = cw_en; w_addr = cw_addr; w_mask = cw_mask; w_data = cw_data;
      w_map_en = cw_map_en; w_map = cw_map;
    end else begin
      w_en = xw_en; w_addr = xw_addr; w_mask = xw_mask; w_data = xw_data;
      w_map_en = xw_map_en; w_map = xw_map;
    end
  end

  sram_buffer u_sram (
    .clk,
    .ra_en, .ra_addr, .ra_data, .ra_map,
    .rb_en (xr_en), .rb_addr (xr_addr), .rb_data (xr_data), .rb_map (xr_map),
    .w_en, .w_addr, .w_mask, .w_data, .w_map_en, .w_map
  );

  addr_gen_unit u_agu (
    .clk, .rst_n, .cfg (cfg_eff),
    .init (agu_init), .tbl_ready, .nchunk,
    .bm_wr, .bm_data,
    .q_pos, .q_end, .f_found, .f_pos, .f_x, .f_y,
    .a_x, .a_y, .a_k, .a_addr
  );

  nz_encoder u_enc (
    .clk, .rst_n, .start (enc_start), .din (enc_din),
    .busy (enc_busy), .done (enc_done), .map (enc_map)
  );

  // an empty lane (no output for its slot) gets an offset map of length 0
  always_comb begin
    ld_map_l = ld_map;
    if (ld_empty) ld_map_l.cnt = '0;
  end

  compute_lanes u_lanes (
    .clk, .rst_n, .in_sparse (cfg.in_sparse),
    .ld_valid, .ld_grp, .ld_lane, .ld_neur, .ld_map (ld_map_l), .ld_empty,
    .syn_valid, .syn_grp, .syn_lane, .syn_data,
    .commit_valid, .commit_grp, .release_valid, .release_grp,
    .grp_ready, .grp_done, .acc, .stalled_lanes, .busy_lanes
  );

  reconfig_adder_tree u_tree (
    .clk, .rst_n, .in_valid (tr_valid), .lg (tr_lg),
    .din (acc[tr_grp]), .out_valid (tr_out_valid), .dout (tr_dout)
  );

  relu_unit u_relu (.mode (cfg.mode), .z (relu_z), .y (relu_y), .nz (relu_nz));

  pe_controller u_ctrl (
    .clk, .rst_n,
    .start, .cmd_encode, .cfg (cfg_eff), .m_idx, .mk, .enc_base, .enc_count,
    .upd_end_valid, .upd_end_pos,
    .busy, .prog_iter, .prog_pos, .prog_end, .prog_last,
    .agu_init, .tbl_ready, .nchunk, .q_pos, .q_end, .f_found, .f_pos, .f_x, .f_y,
    .a_x, .a_y, .a_k, .a_addr,
    .ra_en, .ra_addr, .ra_data, .ra_map,
    .w_en (cw_en), .w_addr (cw_addr), .w_mask (cw_mask), .w_data (cw_data),
    .w_map_en (cw_map_en), .w_map (cw_map),
    .enc_start, .enc_din, .enc_done, .enc_map,
    .ld_valid, .ld_grp, .ld_lane, .ld_neur, .ld_map, .ld_empty,
    .syn_valid, .syn_grp, .syn_lane, .syn_data,
    .commit_valid, .commit_grp, .release_valid, .release_grp, .grp_done,
    .tr_valid, .tr_grp, .tr_lg, .tr_out_valid, .tr_dout,
    .relu_z, .relu_y, .relu_nz,
    .res_valid, .res_ready, .res,
    .n_jobs, .n_passes
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_stall <= '0;
      n_busy  <= '0;
    end else begin
      n_stall <= n_stall + 32'(stalled_lanes);
      n_busy  <= n_busy + 32'(busy_lanes);
    end
  end

  a_xw_idle: assert property (@(posedge clk) disable iff (!rst_n) xw_en |-> !busy)
    else $error("pe: buffer written from the interconnect while busy");
endmodule
