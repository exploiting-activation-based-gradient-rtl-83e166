// tb_sparse_node: end-to-end test of the node at reduced size.
//
// A 2 x 2 grid of PEs, 4 x 4 output tiles per PE, 3 x 3 filters over 32
// channels (9 chunks: passes of 8 and 1 chunks), two filters per layer, a
// forward layer followed by a backward layer. Stimulus, DRAM model and
// checks are in node_env; this file only sizes the grid.
module tb_sparse_node;
  import sparse_pkg::*;

  logic clk, rst_n, start, busy, dram_req, dram_rsp_valid, res_valid, res_ready;
  layer_desc_t desc;
  logic [31:0] dram_addr, n_redist, n_jobs, n_passes, n_stall, n_busy;
  chunk_t dram_rsp_data;
  result_t res;

  sparse_node #(.TX(2), .TY(2)) dut (.*);
  node_env #(.TX(2), .TY(2), .TU(4), .TV(4), .R(3), .S(3), .CCH(1), .NF(2)) env (.*);
endmodule
