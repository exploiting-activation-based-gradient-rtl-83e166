// fp16_mac: half-precision multiply-accumulate unit of one computation lane.
//
// Each cycle with en=1 the product a*b is added to the accumulator of buffer
// group grp. There is one accumulator per double-buffer group, so a lane can
// start on the next group while the adder tree still has to reduce the sums
// of the previous one. clr[g] restarts accumulator g at zero; when clr[grp]
// and en coincide the accumulator takes the bare product. Multiply and add are
// separately rounded (no fused rounding), both in binary16. Latency: acc[]
// shows the new value one cycle after en.
// The paper gives a 16-bit FP MAC per lane; the two accumulators and the
// rounding are this design's choices.
module fp16_mac
  import sparse_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               grp,
  input  fp16_t              a,
  input  fp16_t              b,
  input  logic [GROUPS-1:0]  clr,
  output fp16_t              acc [GROUPS]
);
  fp16_t base, sum;

  assign base = clr[grp] ? fp16_t'(0) : acc[grp];
  assign sum  = fp16_add(base, fp16_mul(a, b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < GROUPS; g++) acc[g] <= '0;
    end else begin
      for (int g = 0; g < GROUPS; g++) begin
        if (en && grp == g[0])  acc[g] <= sum;
        else if (clr[g])        acc[g] <= '0;
      end
    end
  end
endmodule
