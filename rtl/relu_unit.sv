// relu_unit: ReLU between the adder tree and the PE buffer/output.
//
// Forward pass (MODE_FP): y = max(0, z) and nz = 1 exactly when z > 0, which
// is the output bitmap bit stored for the backward pass. Backward pass
// (MODE_BP): only outputs whose bitmap bit is set are ever computed, so the
// gradient is passed unchanged and nz = 1. Combinational.
// The paper places a ReLU block after the adder subtree; generating the
// bitmap bit here is this design's choice of where the bitmap comes from.
module relu_unit
  import sparse_pkg::*;
(
  input  mode_e mode,
  input  fp16_t z,
  output fp16_t y,
  output logic  nz
);
  logic pos;
  assign pos = !z[15] && !fp16_is_zero(z);
  always_comb begin
    if (mode == MODE_FP) begin
      y  = pos ? z : fp16_t'(0);
      nz = pos;
    end else begin
      y  = z;
      nz = 1'b1;
    end
  end
endmodule
