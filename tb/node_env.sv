// node_env: stimulus, DRAM model and checker for end-to-end tests of the
// whole node (sparse_node).
//
// Generates a convolution layer of random small integers (binary16 sums of
// such values are exact, so every result must match bit for bit), lays it
// out in a DRAM model the way the node controller reads it (per-PE input
// tiles with halo, filters, per-PE output-bitmap slices), runs the layer
// and checks that each expected output arrives exactly once with the right
// value, and nothing else. Two layers are run back to back: a forward layer
// (ReLU, all outputs) and a backward layer (only outputs whose bitmap bit is
// set), which exercises the mode switch. The tile of PE 0 is dense while all
// other tiles are mostly zero, so the other PEs finish early and work is
// redistributed to them. Each mechanism is counted: redistributions, lane
// stalls, multi-pass blocking, output skipping in the backward pass and
// zero skipping; one that never happens counts as a failure.
// The DRAM model answers one chunk read at a time, DRAM_LAT cycles after the
// request. All testbench-side choices (layouts, latencies, data ranges) are
// this environment's own.
module node_env
  import sparse_pkg::*;
#(
  parameter int TX  = 2,
  parameter int TY  = 2,
  parameter int TU  = 4,        // output rows per PE tile
  parameter int TV  = 4,        // output columns per PE tile
  parameter int R   = 3,
  parameter int S   = 3,
  parameter int CCH = 1,        // input channels / 32
  parameter int NF  = 2,        // filters per layer
  parameter int SPARSE_PCT = 85,
  parameter int WATCHDOG = 2000000
) (
  output logic        clk,
  output logic        rst_n,
  output logic        start,
  output layer_desc_t desc,
  input  logic        busy,
  input  logic        dram_req,
  input  logic [31:0] dram_addr,
  output logic        dram_rsp_valid,
  output chunk_t      dram_rsp_data,
  input  logic        res_valid,
  output logic        res_ready,
  input  result_t     res,
  input  logic [31:0] n_redist,
  input  logic [31:0] n_jobs,
  input  logic [31:0] n_passes,
  input  logic [31:0] n_stall,
  input  logic [31:0] n_busy
);
  localparam int NPE = TX * TY;
  localparam int H = TX * TU + R - 1, W = TY * TV + S - 1, C = CCH * 32;
  localparam int U = TX * TU, V = TY * TV;
  localparam int TH = TU + R - 1, TW = TV + S - 1;
  localparam int IN_CH = TH * TW * CCH;
  localparam int NCH = R * S * CCH;
  localparam int OUT_BASE = IN_CH;
  localparam int COPY = OUT_BASE + MAX_POS;          // tile + partial sums (mch = 1)
  localparam int SYN_BASE = 2 * COPY;
  localparam int W_BASE = NPE * IN_CH;
  localparam int BM_BASE = W_BASE + NF * NCH;
  localparam int DRAM_LAT = 2;

  initial clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- layer data ----
  byte inp [H][W][C];
  byte wgt [NF][R][S][C];
  bit  bmp [NF][U][V];
  int  got_val [NF][U][V];
  int  got_n   [NF][U][V];

  function automatic fp16_t i2h(int v);
    int a = (v < 0) ? -v : v;
    int e = 0;
    if (v == 0) return 16'd0;
    while ((a >> e) > 1) e++;
    return {(v < 0), 5'(e + 15), 10'((a << (10 - e)) & 10'h3ff)};
  endfunction

  function automatic int h2i(fp16_t h);
    int e, m;
    if (h[14:10] == 0) return 0;
    e = int'(h[14:10]) - 15;
    m = 1024 + int'(h[9:0]);
    m = (e >= 10) ? (m << (e - 10)) : (m >> (10 - e));
    return h[15] ? -m : m;
  endfunction

  // ---- DRAM model: computes the chunk at an address from the layer data ----
  function automatic chunk_t dram_chunk(int unsigned a);
    chunk_t ch = '0;
    if (a < W_BASE) begin
      int p = a / IN_CH, i = a % IN_CH;
      int h = i / (TW * CCH), w = (i / CCH) % TW, cc = i % CCH;
      int gx = (p / TY) * TU + h, gy = (p % TY) * TV + w;
      for (int e = 0; e < 32; e++) ch[e] = i2h(inp[gx][gy][cc*32+e]);
    end else if (a < BM_BASE) begin
      int m = (a - W_BASE) / NCH, k = (a - W_BASE) % NCH;
      int i = k / (S * CCH), j = (k / CCH) % S, cc = k % CCH;
      for (int e = 0; e < 32; e++) ch[e] = i2h(wgt[m][i][j][cc*32+e]);
    end else begin
      int m = (a - BM_BASE) / NPE, p = (a - BM_BASE) % NPE;
      logic [511:0] bits = '0;
      for (int x = 0; x < TU; x++)
        for (int y = 0; y < TV; y++)
          bits[x * MAX_TV + y] = bmp[m][(p / TY) * TU + x][(p % TY) * TV + y];
      ch = chunk_t'(bits);
    end
    return ch;
  endfunction

  int unsigned pend_addr;
  int pend_cnt = 0;
  always @(posedge clk) begin
    dram_rsp_valid <= 1'b0;
    if (pend_cnt > 0) begin
      pend_cnt <= pend_cnt - 1;
      if (pend_cnt == 1) begin
        dram_rsp_valid <= 1'b1;
        dram_rsp_data  <= dram_chunk(pend_addr);
      end
    end
    if (dram_req) begin
      checks++;
      if (pend_cnt > 1) begin failures++; $display("DRAM request while one is outstanding"); end
      pend_addr <= dram_addr;
      pend_cnt  <= DRAM_LAT;
    end
  end

  // ---- result collection ----
  always @(posedge clk)
    if (res_valid && res_ready) begin
      if (int'(res.m) < NF && int'(res.x) < U && int'(res.y) < V) begin
        got_val[res.m][res.x][res.y] = h2i(res.value);
        got_n[res.m][res.x][res.y]++;
      end else begin
        failures++; $display("result out of range (%0d,%0d,%0d)", res.x, res.y, res.m);
      end
    end

  int redist_fp = 0, redist_bp = 0, skipped_bp = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle++;

  task automatic run_layer(input string name, input mode_e mode);
    int r0 = int'(n_redist), p0 = int'(n_passes);
    int exp_res = 0, t0;
    // data: PE 0's tile dense, the rest sparse
    for (int h = 0; h < H; h++)
      for (int w = 0; w < W; w++)
        for (int k = 0; k < C; k++) begin
          bit in_pe0 = (h < TH) && (w < TW);
          int zp = in_pe0 ? 0 : SPARSE_PCT;
          inp[h][w][k] = (int'($urandom_range(99)) < zp) ? 8'sd0 : byte'(int'($urandom_range(4)) - 2);
        end
    for (int m = 0; m < NF; m++) begin
      for (int i = 0; i < R; i++)
        for (int j = 0; j < S; j++)
          for (int k = 0; k < C; k++) wgt[m][i][j][k] = byte'(int'($urandom_range(4)) - 2);
      for (int x = 0; x < U; x++)
        for (int y = 0; y < V; y++) begin
          bmp[m][x][y] = ($urandom_range(99) < 50);
          got_n[m][x][y] = 0;
        end
    end
    desc = '0;
    desc.cfg.mode = mode; desc.cfg.in_sparse = 1'b1;
    desc.cfg.tu = 4'(TU); desc.cfg.tv = 4'(TV); desc.cfg.r = 3'(R); desc.cfg.s = 3'(S);
    desc.cfg.cch = 6'(CCH); desc.cfg.mch = 6'd1;
    desc.cfg.neur_base = '0; desc.cfg.out_base = ADDR_W'(OUT_BASE); desc.cfg.syn_base = ADDR_W'(SYN_BASE);
    desc.nfilt = M_W'(NF); desc.in_chunks = ADDR_W'(IN_CH); desc.copy_chunks = ADDR_W'(COPY);
    desc.in_base = 0; desc.w_base = W_BASE; desc.bm_base = BM_BASE; desc.redist_en = 1'b1;
    t0 = cycle;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (20) @(negedge clk);            // results still in flight
    // compare
    for (int m = 0; m < NF; m++)
      for (int x = 0; x < U; x++)
        for (int y = 0; y < V; y++) begin
          bit want = (mode == MODE_FP) || bmp[m][x][y];
          checks++;
          if (want) begin
            int sum = 0;
            for (int i = 0; i < R; i++)
              for (int j = 0; j < S; j++)
                for (int k = 0; k < C; k++)
                  sum += int'(inp[x+i][y+j][k]) * int'(wgt[m][i][j][k]);
            if (mode == MODE_FP && sum < 0) sum = 0;
            exp_res++;
            if (got_n[m][x][y] != 1 || got_val[m][x][y] != sum) begin
              failures++;
              if (failures < 20)
                $display("%s: out(m=%0d,%0d,%0d) got %0d x%0d exp %0d", name, m, x, y,
                         got_val[m][x][y], got_n[m][x][y], sum);
            end
          end else begin
            if (got_n[m][x][y] != 0) begin
              failures++; $display("%s: unexpected out(m=%0d,%0d,%0d)", name, m, x, y);
            end
            skipped_bp++;
          end
        end
    if (mode == MODE_FP) redist_fp += int'(n_redist) - r0;
    else                 redist_bp += int'(n_redist) - r0;
    checks++;
    if (int'(n_passes) - p0 < NPE * NF * 2) begin
      failures++; $display("%s: %0d passes, expected multi-pass blocking", name, int'(n_passes) - p0);
    end
    $display("%s: %0d results in %0d cycles, %0d redistributions, %0d passes",
             name, exp_res, cycle - t0, int'(n_redist) - r0, int'(n_passes) - p0);
  endtask

  initial begin
    rst_n = 0; start = 0; desc = '0; res_ready = 1; dram_rsp_valid = 0; dram_rsp_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer("forward", MODE_FP);
    run_layer("backward", MODE_BP);
    $display("mechanisms: redistributions fp=%0d bp=%0d, lane stalls=%0d, skipped outputs=%0d, jobs=%0d, busy lane-cycles=%0d",
             redist_fp, redist_bp, n_stall, skipped_bp, n_jobs, n_busy);
    checks++; if (redist_fp == 0) begin failures++; $display("no redistribution in the forward pass"); end
    checks++; if (redist_bp == 0) begin failures++; $display("no redistribution in the backward pass"); end
    checks++; if (n_stall == 0)   begin failures++; $display("no lane stall"); end
    checks++; if (skipped_bp == 0) begin failures++; $display("no output skipped in the backward pass"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
