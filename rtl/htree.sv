// htree: H-tree interconnect between the node controller and the PEs.
//
// Write network: a packet (broadcast or to one PE; buffer address and a
// 64-byte chunk, or an output bitmap) enters at the root and passes LEVELS
// register stages, one per level of the tree, before it is decoded at the
// leaves into the write strobes of the addressed PE(s). Broadcast is how a
// filter is sent to all PEs at once.
// Read network: a request (PE, address) travels down LEVELS stages, the PE
// buffer answers one cycle later, and the selected chunk and offset map come
// back up LEVELS stages. rd_valid marks the answer, 2*LEVELS+1 cycles after
// rd_req.
// The paper names the H-tree and its 512 GB/s broadcast bandwidth; the
// packet format and one register per level are this design's choices.
module htree
  import sparse_pkg::*;
#(
  parameter int unsigned NPE    = 256,
  parameter int unsigned LEVELS = 4          // log4(NPE) levels of the H-tree
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // root side
  input  logic                 wr_valid,
  input  tree_wr_t             wr,
  input  logic                 rd_req,
  input  logic [7:0]           rd_pe,
  input  logic [ADDR_W-1:0]    rd_addr,
  output logic                 rd_valid,
  output chunk_t               rd_data,
  output nzmap_t               rd_map,
  // leaf side
  output logic [NPE-1:0]       xw_en,
  output logic [NPE-1:0]       bm_wr,
  output logic [ADDR_W-1:0]    xw_addr,
  output chunk_t               xw_data,
  output logic                 xw_map_en,
  output nzmap_t               xw_map,
  output logic [NPE-1:0]       xr_en,
  output logic [ADDR_W-1:0]    xr_addr,
  input  chunk_t               xr_data [NPE],
  input  nzmap_t               xr_map  [NPE]
);
  logic     wv_q [LEVELS];
  tree_wr_t w_q  [LEVELS];
  logic     rv_q [LEVELS];
  logic [7:0]        rpe_q  [LEVELS];
  logic [ADDR_W-1:0] radr_q [LEVELS];
  logic     uv_q [LEVELS+1];
  logic [7:0] upe_q;
  chunk_t   ud_q [LEVELS];
  nzmap_t   um_q [LEVELS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LEVELS; l++) begin
        wv_q[l] <= 1'b0; rv_q[l] <= 1'b0; w_q[l] <= '0;
        rpe_q[l] <= '0; radr_q[l] <= '0; ud_q[l] <= '0; um_q[l] <= '0;
      end
      for (int l = 0; l <= LEVELS; l++) uv_q[l] <= 1'b0;
      upe_q <= '0;
    end else begin
      wv_q[0] <= wr_valid; w_q[0] <= wr;
      rv_q[0] <= rd_req;   rpe_q[0] <= rd_pe; radr_q[0] <= rd_addr;
      for (int l = 1; l < LEVELS; l++) begin
        wv_q[l] <= wv_q[l-1]; w_q[l] <= w_q[l-1];
        rv_q[l] <= rv_q[l-1]; rpe_q[l] <= rpe_q[l-1]; radr_q[l] <= radr_q[l-1];
      end
      // leaf: the buffer answers one cycle after xr_en
      uv_q[0] <= rv_q[LEVELS-1];
      upe_q   <= rpe_q[LEVELS-1];
      // up the tree
      uv_q[1] <= uv_q[0];
      ud_q[0] <= xr_data[upe_q];
      um_q[0] <= xr_map[upe_q];
      for (int l = 1; l < LEVELS; l++) begin
        uv_q[l+1] <= uv_q[l]; ud_q[l] <= ud_q[l-1]; um_q[l] <= um_q[l-1];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      xw_en[p] = wv_q[LEVELS-1] && !w_q[LEVELS-1].is_bm &&
                 (w_q[LEVELS-1].bcast || w_q[LEVELS-1].dst == 8'(p));
      bm_wr[p] = wv_q[LEVELS-1] && w_q[LEVELS-1].is_bm &&
                 (w_q[LEVELS-1].bcast || w_q[LEVELS-1].dst == 8'(p));
      xr_en[p] = rv_q[LEVELS-1] && rpe_q[LEVELS-1] == 8'(p);
    end
  end
  assign xw_addr  = w_q[LEVELS-1].addr;
  assign xw_data  = w_q[LEVELS-1].data;
  assign xw_map_en = w_q[LEVELS-1].map_en;
  assign xw_map   = w_q[LEVELS-1].map;
  assign xr_addr  = radr_q[LEVELS-1];
  assign rd_valid = uv_q[LEVELS];
  assign rd_data  = ud_q[LEVELS-1];
  assign rd_map   = um_q[LEVELS-1];
endmodule
