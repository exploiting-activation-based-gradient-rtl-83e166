// tb_sram_buffer: checks the PE buffer.
//
// Random writes (with random entry masks and optional offset-map writes)
// and reads on both read ports, against a model array. Reads return the
// data one cycle after the request; a read and a write to the same chunk in
// one cycle return the old data. The whole address range (2048 chunks of
// 64 bytes = 4 banks x 32 KB) is written and read back first.
module tb_sram_buffer;
  import sparse_pkg::*;

  logic clk = 0;
  logic ra_en = 0, rb_en = 0, w_en = 0, w_map_en = 0;
  logic [ADDR_W-1:0] ra_addr = '0, rb_addr = '0, w_addr = '0;
  logic [ENTRIES-1:0] w_mask = '0;
  chunk_t ra_data, rb_data, w_data = '0;
  nzmap_t ra_map, rb_map, w_map = '0;
  always #5 clk = ~clk;

  sram_buffer dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  chunk_t mdl  [1 << ADDR_W];
  nzmap_t mmap [1 << ADDR_W];
  chunk_t exp_a, exp_b;
  nzmap_t exp_am, exp_bm;
  bit chk_a = 0, chk_b = 0;

  function automatic chunk_t rnd_chunk();
    chunk_t c;
    for (int e = 0; e < ENTRIES; e++) c[e] = fp16_t'($urandom);
    return c;
  endfunction

  always @(negedge clk) begin
    if (chk_a) begin
      checks++;
      if (ra_data != exp_a || ra_map != exp_am) begin failures++; $display("port A mismatch"); end
    end
    if (chk_b) begin
      checks++;
      if (rb_data != exp_b || rb_map != exp_bm) begin failures++; $display("port B mismatch"); end
    end
    chk_a = ra_en; chk_b = rb_en;
    if (ra_en) begin exp_a = mdl[ra_addr]; exp_am = mmap[ra_addr]; end
    if (rb_en) begin exp_b = mdl[rb_addr]; exp_bm = mmap[rb_addr]; end
    if (w_en) begin
      for (int e = 0; e < ENTRIES; e++) if (w_mask[e]) mdl[w_addr][e] = w_data[e];
      if (w_map_en) mmap[w_addr] = w_map;
    end
  end

  initial begin
    // fill everything
    for (int a = 0; a < (1 << ADDR_W); a++) begin
      @(negedge clk);
      w_en = 1; w_addr = ADDR_W'(a); w_mask = '1; w_data = rnd_chunk();
      w_map_en = 1; w_map = nzmap_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
    end
    // read everything back on both ports
    for (int a = 0; a < (1 << ADDR_W); a++) begin
      @(negedge clk);
      w_en = 0; ra_en = 1; ra_addr = ADDR_W'(a); rb_en = 1; rb_addr = ADDR_W'(a ^ 11'h5a5);
    end
    // random mixed traffic on a small address window (frequent collisions)
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      ra_en = 1'($urandom); ra_addr = ADDR_W'($urandom_range(15));
      rb_en = 1'($urandom); rb_addr = ADDR_W'($urandom_range(15));
      w_en = 1'($urandom); w_addr = ADDR_W'($urandom_range(15));
      w_mask = ENTRIES'($urandom); w_data = rnd_chunk();
      w_map_en = 1'($urandom);
      w_map = nzmap_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
    end
    @(negedge clk); ra_en = 0; rb_en = 0; w_en = 0;
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
