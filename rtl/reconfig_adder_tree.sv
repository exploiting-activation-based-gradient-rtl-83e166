// reconfig_adder_tree: reconfigurable reduction of the 16 lane accumulators.
//
// Four stages of binary16 adders (8, 4, 2 and 1 adders: 15 in all) reduce the
// lane sums in groups of 2^lg consecutive lanes. Between stages sit
// demultiplexers, preset by lg, that either pass a partial sum on to the next
// adder stage or route it to the output register. With lg = 4 the tree yields
// one sum of all 16 lanes (dout[0]); with lg = k it yields 16 >> k independent
// sums, dout[j] = din[j*2^k] + ... + din[j*2^k + 2^k - 1]; unused outputs read
// zero. The structure follows the paper's figure for four lanes, extended to
// sixteen. The result is registered: dout/out_valid follow in_valid by one
// cycle. Additions within a group are done pairwise in tree order.
module reconfig_adder_tree
  import sparse_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [2:0]  lg,            // log2 of the group size, 0..4
  input  fp16_t       din  [LANES],
  output logic        out_valid,
  output fp16_t       dout [LANES]   // the "out register"
);
  localparam int unsigned STAGES = $clog2(LANES);

  fp16_t lvl [STAGES+1][LANES];

  always_comb begin
    lvl[0] = din;
    for (int k = 1; k <= STAGES; k++)
      for (int i = 0; i < LANES; i++)
        // demux: a partial sum goes on to the next adder only when the
        // group extends past this stage, otherwise the adder sees zeros
        if (i < (LANES >> k) && lg >= 3'(k))
          lvl[k][i] = fp16_add(lvl[k-1][2*i], lvl[k-1][2*i+1]);
        else
          lvl[k][i] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < LANES; j++) dout[j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int j = 0; j < LANES; j++)
          dout[j] <= (lg <= 3'(STAGES)) ? lvl[lg][j] : fp16_t'(0);
    end
  end
endmodule
