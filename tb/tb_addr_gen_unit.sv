// tb_addr_gen_unit: checks the output-bitmap driven address generator.
//
// For random layer shapes (tile 1..14 x 1..14, filters 1..7 x 1..7, 1..8
// channel chunks, both passes): after init the receptive-field table must be
// ready after exactly R*S*C/32 cycles (one entry per cycle); the address of
// random (x, y, k) must equal the channel-first address of input
// (x+i, y+j, chunk c) in the halo tile; the non-zero search must return the
// first computable position in [cursor, end) - every position of the tile
// in the forward pass, only bitmap-marked ones in the backward pass.
module tb_addr_gen_unit;
  import sparse_pkg::*;

  logic clk = 0, rst_n = 0, init = 0, tbl_ready, bm_wr = 0, f_found;
  layer_cfg_t cfg;
  logic [KCH_W-1:0] nchunk, a_k;
  logic [MAX_POS-1:0] bm_data;
  logic [POS_W-1:0] q_pos, q_end, f_pos;
  logic [3:0] f_x, f_y, a_x, a_y;
  logic [ADDR_W-1:0] a_addr;
  always #5 clk = ~clk;

  addr_gen_unit dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit bm [MAX_POS];
    cfg = '0; bm_data = '0; q_pos = 0; q_end = 0; a_x = 0; a_y = 0; a_k = 0;
    #22 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int tu = int'($urandom_range(13)) + 1, tv = int'($urandom_range(13)) + 1;
      automatic int r = int'($urandom_range(6)) + 1, s = int'($urandom_range(6)) + 1;
      automatic int cch = int'($urandom_range(7)) + 1;
      automatic int tw = tv + s - 1, lat = 0;
      @(negedge clk);
      cfg = '0;
      cfg.mode = mode_e'($urandom_range(1));
      cfg.tu = 4'(tu); cfg.tv = 4'(tv); cfg.r = 3'(r); cfg.s = 3'(s); cfg.cch = 6'(cch);
      cfg.neur_base = ADDR_W'($urandom_range(255));
      foreach (bm[p]) begin bm[p] = ($urandom_range(99) < 30); bm_data[p] = bm[p]; end
      bm_wr = 1; init = 1;
      @(negedge clk); bm_wr = 0; init = 0;
      while (!tbl_ready) begin @(negedge clk); lat++; end
      checks++;
      if (lat != r * s * cch || int'(nchunk) != r * s * cch) begin
        failures++; $display("table latency %0d / nchunk %0d, exp %0d", lat, nchunk, r * s * cch);
      end
      // addresses
      for (int n = 0; n < 200; n++) begin
        automatic int x = int'($urandom_range(tu - 1)), y = int'($urandom_range(tv - 1));
        automatic int i = int'($urandom_range(r - 1)), j = int'($urandom_range(s - 1)), c = int'($urandom_range(cch - 1));
        automatic int ex = int'(cfg.neur_base) + ((x + i) * tw + (y + j)) * cch + c;
        a_x = 4'(x); a_y = 4'(y); a_k = KCH_W'((i * s + j) * cch + c);
        #1;
        checks++;
        if (int'(a_addr) != (ex % (1 << ADDR_W))) begin
          failures++; $display("addr (%0d,%0d,%0d,%0d,%0d): %0d exp %0d", x, y, i, j, c, a_addr, ex);
        end
      end
      // non-zero search
      for (int n = 0; n < 100; n++) begin
        automatic int lo = int'($urandom_range(MAX_POS - 1)), hi = int'($urandom_range(MAX_POS));
        automatic int ef = -1;
        q_pos = POS_W'(lo); q_end = POS_W'(hi);
        for (int p = MAX_POS - 1; p >= 0; p--)
          if (p >= lo && p < hi && p / MAX_TV < tu && p % MAX_TV < tv && (cfg.mode == MODE_FP || bm[p]))
            ef = p;
        #1;
        checks++;
        if (f_found != (ef >= 0) || (ef >= 0 && (int'(f_pos) != ef ||
            int'(f_x) != ef / MAX_TV || int'(f_y) != ef % MAX_TV))) begin
          failures++; $display("search [%0d,%0d): found %0d pos %0d, exp %0d", lo, hi, f_found, f_pos, ef);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
