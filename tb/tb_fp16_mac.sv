// tb_fp16_mac: checks the half-precision MAC unit against exact real
// arithmetic rounded to binary16 after every step, on both accumulators,
// including clear and the clear-with-enable case. One cycle per MAC.
module tb_fp16_mac;
  import sparse_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic en, grp;
  fp16_t a, b;
  logic [1:0] clr;
  fp16_t acc [2];
  int checks = 0, failures = 0;
  fp16_t model [2];

  fp16_mac dut (.clk, .rst_n, .en, .grp, .a, .b, .clr, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // directed: MAC example of the encoder figure, 4*2+4*3+1*4+3*8+5*12 = 108
  task automatic run_dot(input int na[5], input int sa[5]);
    for (int i = 0; i < 5; i++) begin
      en = 1; grp = 0; clr = (i == 0) ? 2'b01 : 2'b00;
      a = r2f(real'(na[i])); b = r2f(real'(sa[i]));
      @(posedge clk); #1;
    end
    en = 0; clr = 0;
    checks++;
    if (!same(acc[0], r2f(108.0))) begin
      failures++; $display("dot: got %h", acc[0]);
    end
  endtask

  initial begin
    en = 0; grp = 0; a = 0; b = 0; clr = 0;
    model[0] = 0; model[1] = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    run_dot('{4, 4, 1, 3, 5}, '{2, 3, 4, 8, 12});
    clr = 2'b11; @(posedge clk); #1; clr = 0;
    checks++; if (!same(acc[0], 0) || !same(acc[1], 0)) failures++;
    for (int t = 0; t < 4000; t++) begin
      en  = 1'($urandom_range(3) != 0);
      grp = 1'($urandom);
      clr = (t % 97 == 0) ? 2'($urandom) : 2'b00;
      a   = rnd(6, 10);
      b   = rnd(6, 10);
      for (int g = 0; g < 2; g++) begin
        if (en && grp == g[0])
          model[g] = ref_add(clr[g] ? 16'd0 : model[g], ref_mul(a, b));
        else if (clr[g])
          model[g] = 0;
        if (model[g][14:10] == 5'h1f || model[g][14:10] > 5'd26) model[g] = model[g]; // kept
      end
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        checks++;
        if (!same(acc[g], model[g])) begin
          failures++;
          if (failures < 10) $display("t=%0d g=%0d a=%h b=%h got %h exp %h", t, g, a, b, acc[g], model[g]);
          model[g] = acc[g];
        end
      end
      // keep accumulators in range: restart them now and then
      if (model[0][14:10] > 5'd27) begin clr = 2'b01; en = 0; @(posedge clk); #1; clr = 0; model[0] = 0; end
      if (model[1][14:10] > 5'd27) begin clr = 2'b10; en = 0; @(posedge clk); #1; clr = 0; model[1] = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
