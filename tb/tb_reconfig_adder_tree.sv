// tb_reconfig_adder_tree: checks the reconfigurable adder tree.
//
// For every group size 1, 2, 4, 8 and 16 (lg = 0..4) and random lane values
// (small integers, so binary16 sums are exact) output j must hold the sum
// of lanes j*2^lg .. j*2^lg + 2^lg - 1 for j < 16 / 2^lg and zero above,
// one cycle after in_valid. Back-to-back inputs with changing lg check that
// the tree accepts one reduction per cycle.
module tb_reconfig_adder_tree;
  import sparse_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] lg;
  fp16_t din [LANES];
  fp16_t dout [LANES];
  always #5 clk = ~clk;

  reconfig_adder_tree dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t i2h(int v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    if (v == 0) return 16'd0;
    while ((a >> e) > 1) e++;
    return {(v < 0), 5'(e + 15), 10'((a << (10 - e)) & 10'h3ff)};
  endfunction

  int exp_q [LANES];
  bit pend = 0;

  always @(negedge clk) if (rst_n) begin
    if (pend) begin
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int j = 0; j < LANES; j++) begin
        checks++;
        if (dout[j] != i2h(exp_q[j])) begin
          failures++; $display("lane %0d: %h exp %0d", j, dout[j], exp_q[j]);
        end
      end
    end else begin
      checks++;
      if (out_valid) begin failures++; $display("spurious out_valid"); end
    end
    pend = 0;
    if ($urandom_range(3) != 0) begin
      int v [LANES];
      int g;
      lg = 3'($urandom_range(4));
      g = 1 << lg;
      foreach (v[i]) begin v[i] = int'($urandom_range(16)) - 8; din[i] = i2h(v[i]); end
      for (int j = 0; j < LANES; j++) begin
        exp_q[j] = 0;
        if (j < LANES / g)
          for (int i = 0; i < g; i++) exp_q[j] += v[j*g + i];
      end
      in_valid = 1; pend = 1;
    end else in_valid = 0;
  end

  initial begin
    lg = 0;
    foreach (din[i]) din[i] = '0;
    #22 rst_n = 1;
    repeat (3000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
