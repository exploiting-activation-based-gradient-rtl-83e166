// tb_pe: end-to-end test of one processing element.
//
// Loads an input tile (with halo) and a filter into the PE buffer through its
// interconnect port, runs the non-zero encoder over the tile, runs CONV and
// compares every result with a convolution computed here. Values are small
// integers, so binary16 arithmetic is exact and results must match bit for
// bit. Cases cover: forward pass with ReLU, backward pass with an output
// bitmap (output sparsity), a 9-chunk receptive field (passes of 8 and 1
// chunks with partial sums), a 36-chunk field (a full 32-chunk pass over both
// groups plus a pass of 4), 1x1 filters (8 outputs per job), dense input,
// a lowered end marker during a run (work taken away by redistribution) and
// a run over a window of positions (work received by redistribution). Pass and job counts are checked too.
module tb_pe;
  import sparse_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, cmd_encode, upd_end_valid, busy, prog_last, bm_wr;
  layer_cfg_t cfg;
  logic [M_W-1:0] m_idx;
  markers_t mk;
  logic [ADDR_W-1:0] enc_base, enc_count;
  logic [POS_W-1:0] upd_end_pos, prog_pos, prog_end;
  logic [ITER_W-1:0] prog_iter;
  logic [MAX_POS-1:0] bm_data;
  logic xw_en, xw_map_en, xr_en;
  logic [ADDR_W-1:0] xw_addr, xr_addr;
  logic [ENTRIES-1:0] xw_mask;
  chunk_t xw_data, xr_data;
  nzmap_t xw_map, xr_map;
  logic res_valid, res_ready;
  result_t res;
  logic [31:0] n_jobs, n_passes, n_stall, n_busy;

  pe dut (.*);

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- layer data kept by the testbench ----
  int inp [16][16][128];      // [h][w][c]
  int wgt [7][7][128];        // [i][j][c]
  bit bmp [MAX_POS];
  int got_val [MAX_POS];
  int got_n   [MAX_POS];
  int stall_total = 0;

  function automatic fp16_t i2h(int v);
    real r = real'(v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    fp16_t h;
    if (v == 0) return 16'd0;
    while ((a >> e) > 1) e++;
    h = {(v < 0), 5'(e + 15), 10'((a << (10 - e)) & 10'h3ff)};
    return h;
  endfunction

  function automatic int h2i(fp16_t h);
    int e, m;
    if (h[14:10] == 0) return 0;
    e = int'(h[14:10]) - 15;
    m = 1024 + int'(h[9:0]);
    m = (e >= 10) ? (m << (e - 10)) : (m >> (10 - e));
    return h[15] ? -m : m;
  endfunction

  task automatic xwrite(input logic [ADDR_W-1:0] a, input chunk_t d);
    @(negedge clk);
    xw_en = 1; xw_addr = a; xw_data = d; xw_mask = '1;
    @(negedge clk);
    xw_en = 0;
  endtask

  task automatic run_cmd(input bit enc);
    @(negedge clk);
    start = 1; cmd_encode = enc;
    @(negedge clk);
    start = 0;
  endtask

  // one test case
  task automatic run_case(input string name, input mode_e mode, input bit sparse,
                          input int tu, input int tv, input int r, input int s,
                          input int cch, input int zero_pct,
                          input int st_iter, input int st_pos, input int en_pos,
                          input int cut_at, input int exp_passes);
    int th = tu + r - 1, tw = tv + s - 1, c = cch * 32;
    int nch = r * s * cch;
    int exp_res = 0, n_res = 0, first_res = 0;
    int t0;
    int nexp_passes;
    int lastbase, rem, np;
    int pass_base [32];
    int pass_n [32];
    chunk_t ch;
    // data
    for (int h = 0; h < th; h++)
      for (int w = 0; w < tw; w++)
        for (int k = 0; k < c; k++)
          inp[h][w][k] = (int'($urandom_range(99)) < zero_pct) ? 0 : int'($urandom_range(4)) - 2;
    for (int i = 0; i < r; i++)
      for (int j = 0; j < s; j++)
        for (int k = 0; k < c; k++)
          wgt[i][j][k] = int'($urandom_range(4)) - 2;
    for (int p = 0; p < MAX_POS; p++) begin
      bmp[p] = ($urandom_range(99) < 45);
      got_n[p] = 0;
    end
    // configuration
    cfg = '0;
    cfg.mode = mode; cfg.in_sparse = sparse;
    cfg.tu = 4'(tu); cfg.tv = 4'(tv); cfg.r = 3'(r); cfg.s = 3'(s);
    cfg.cch = 6'(cch); cfg.mch = 6'd1;
    cfg.neur_base = 11'd0; cfg.syn_base = 11'd1200; cfg.out_base = 11'd1800;
    m_idx = 10'd37;                            // value 5 of the partial-sum chunk
    // load buffer: input tile, filter
    for (int h = 0; h < th; h++)
      for (int w = 0; w < tw; w++)
        for (int cc = 0; cc < cch; cc++) begin
          for (int e = 0; e < 32; e++) ch[e] = i2h(inp[h][w][cc*32+e]);
          xwrite(ADDR_W'((h*tw + w)*cch + cc), ch);
        end
    for (int i = 0; i < r; i++)
      for (int j = 0; j < s; j++)
        for (int cc = 0; cc < cch; cc++) begin
          for (int e = 0; e < 32; e++) ch[e] = i2h(wgt[i][j][cc*32+e]);
          xwrite(ADDR_W'(1200 + (i*s + j)*cch + cc), ch);
        end
    for (int p = 0; p < MAX_POS; p++) bm_data[p] = bmp[p];
    @(negedge clk); bm_wr = 1; @(negedge clk); bm_wr = 0;
    // encode the input tile
    enc_base = 0; enc_count = ADDR_W'(th*tw*cch);
    run_cmd(1);
    while (busy) @(negedge clk);
    // check one offset map read back through the interconnect port
    @(negedge clk); xr_en = 1; xr_addr = 0; @(negedge clk); xr_en = 0;
    begin
      int nz = 0; bit okm = 1;
      for (int e = 0; e < 32; e++)
        if (inp[0][0][e] != 0) begin
          if (xr_map.idx[nz] != 5'(e)) okm = 0;
          nz++;
        end
      checks++;
      if (!okm || xr_map.cnt != 6'(nz)) begin
        failures++; $display("%s: offset map of chunk 0 wrong", name);
      end
    end
    // pass plan (independent restatement of the blocking rule)
    lastbase = 0; np = 0;
    while (lastbase < nch) begin
      rem = nch - lastbase;
      pass_n[np] = (rem >= 32) ? 32 : (rem >= 16) ? 16 : (rem >= 8) ? 8 : (rem >= 4) ? 4 : (rem >= 2) ? 2 : 1;
      pass_base[np] = lastbase;
      lastbase += pass_n[np];
      np++;
    end
    nexp_passes = np - st_iter;
    // run
    mk.start_iter = ITER_W'(st_iter); mk.start_pos = POS_W'(st_pos);
    mk.end_pos = POS_W'(en_pos); mk.org_x = 8'd20; mk.org_y = 8'd40;
    t0 = cycle;
    run_cmd(0);
    while (busy || dut.u_ctrl.st_q != 0) begin
      @(negedge clk);
      if (cut_at >= 0 && prog_pos > POS_W'(cut_at / 2) && prog_last && !upd_end_valid && prog_end > POS_W'(cut_at)) begin
        upd_end_valid = 1; upd_end_pos = POS_W'(cut_at);
      end else upd_end_valid = 0;
      if (res_valid && res_ready) begin
        int p = (int'(res.x) - 20) * MAX_TV + (int'(res.y) - 40);
        got_val[p] = h2i(res.value);
        got_n[p]++;
        n_res++;
        if (res.m != m_idx) begin failures++; $display("%s: wrong m", name); end
      end
    end
    stall_total += int'(n_stall);
    // compare
    for (int x = 0; x < tu; x++)
      for (int y = 0; y < tv; y++) begin
        int p = x * MAX_TV + y;
        int lo = st_pos, hi = (cut_at >= 0) ? cut_at : en_pos;
        bit want = (p >= lo && p < hi) && (mode == MODE_FP || bmp[p]);
        if (want) begin
          int sum = 0;
          for (int i = 0; i < r; i++)
            for (int j = 0; j < s; j++)
              for (int k = 0; k < c; k++)
                sum += inp[x+i][y+j][k] * wgt[i][j][k];
          if (mode == MODE_FP && sum < 0) sum = 0;
          exp_res++;
          checks++;
          if (got_n[p] != 1 || got_val[p] != sum) begin
            failures++;
            if (failures < 20) $display("%s: out(%0d,%0d) got %0d x%0d exp %0d", name, x, y, got_val[p], got_n[p], sum);
          end
        end else begin
          checks++;
          if (got_n[p] != 0) begin failures++; $display("%s: unexpected out(%0d,%0d)", name, x, y); end
        end
      end
    checks++;
    if (n_res != exp_res) begin failures++; $display("%s: %0d results, expected %0d", name, n_res, exp_res); end
    checks++;
    if (int'(n_passes) != nexp_passes) begin failures++; $display("%s: %0d passes, expected %0d", name, n_passes, nexp_passes); end
    $display("%s: %0d outputs in %0d cycles, %0d passes, %0d jobs, %0d stalled lane-cycles",
             name, n_res, cycle - t0, n_passes, n_jobs, n_stall);
    // reset statistics between cases
    rst_n = 0; @(negedge clk); rst_n = 1;
  endtask

  initial begin
    start = 0; cmd_encode = 0; upd_end_valid = 0; upd_end_pos = 0; bm_wr = 0;
    xw_en = 0; xw_map_en = 0; xr_en = 0; xw_addr = 0; xr_addr = 0; xw_mask = 0;
    xw_data = '0; xw_map = '0; res_ready = 1; bm_data = '0; cfg = '0; m_idx = 0;
    mk = '0; enc_base = 0; enc_count = 0;
    #22 rst_n = 1;
    //        name       mode     sp tu tv  r  s cch z%  it pos end     cut
    run_case("fp3x3",   MODE_FP, 1, 4, 4, 3, 3, 1, 50, 0, 0, MAX_POS, -1, 0);
    run_case("bp3x3c4", MODE_BP, 1, 5, 5, 3, 3, 4, 50, 0, 0, MAX_POS, -1, 0);
    run_case("fp1x1",   MODE_FP, 1, 6, 6, 1, 1, 2, 40, 0, 0, MAX_POS, -1, 0);
    run_case("dense",   MODE_FP, 0, 3, 3, 3, 3, 1, 50, 0, 0, MAX_POS, -1, 0);
    run_case("bp5x5",   MODE_BP, 1, 4, 4, 5, 5, 2, 60, 0, 0, MAX_POS, -1, 0);
    run_case("cut",     MODE_BP, 1, 8, 8, 3, 3, 1, 50, 0, 0, MAX_POS, 60, 0);
    run_case("window",  MODE_FP, 1, 6, 6, 1, 1, 1, 50, 0, 20, 50, -1, 0);
    checks++;
    if (stall_total == 0) begin failures++; $display("no lane stall observed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
