// tb_nz_encoder: checks the non-zero offset encoder.
//
// First the channel vector of the paper's encoding example (non-zeros at
// entries 1, 2, 3, 7 and 11 of 32), then random chunks with zero fractions
// from 0 % to 100 %, including +0/-0 and subnormal values, which count as
// zero. For each chunk the offsets must be the positions of the non-zero
// entries in increasing order, the count must match, and done must come
// exactly ENTRIES + 1 cycles after start (one entry read per cycle).
module tb_nz_encoder;
  import sparse_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  chunk_t din;
  nzmap_t map;
  always #5 clk = ~clk;

  nz_encoder dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic encode(input chunk_t v);
    int lat = 0, n = 0;
    bit ok = 1;
    @(negedge clk); din = v; start = 1;
    @(negedge clk); start = 0; din = '0;
    while (!done) begin @(negedge clk); lat++; end
    for (int e = 0; e < ENTRIES; e++)
      if (v[e][14:10] != 0) begin
        if (map.idx[n] != OFF_W'(e)) ok = 0;
        n++;
      end
    checks++;
    if (!ok || map.cnt != CNT_W'(n)) begin
      failures++; $display("map wrong: cnt %0d exp %0d", map.cnt, n);
    end
    checks++;
    if (lat != ENTRIES) begin failures++; $display("latency %0d", lat + 1); end
  endtask

  initial begin
    chunk_t v;
    din = '0;
    #22 rst_n = 1;
    v = '0;
    v[1] = 16'h4400; v[2] = 16'h4400; v[3] = 16'h3c00; v[7] = 16'h4200; v[11] = 16'h4500;
    encode(v);
    for (int t = 0; t < 300; t++) begin
      automatic int zp = int'($urandom_range(100));
      for (int e = 0; e < ENTRIES; e++) begin
        if (int'($urandom_range(99)) < zp)
          v[e] = {1'($urandom_range(1)), 5'd0, 10'($urandom_range(3) == 0 ? 0 : $urandom)};
        else
          v[e] = {1'($urandom_range(1)), 5'($urandom_range(30) + 1), 10'($urandom)};
      end
      encode(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
