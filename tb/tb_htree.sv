// tb_htree: checks the H-tree interconnect (16 leaves, 2 levels).
//
// Leaf buffers are modelled here (one-cycle read latency). Random traffic:
// unicast and broadcast chunk writes, bitmap writes and chunk reads. A write
// must reach exactly the addressed leaves (all of them for a broadcast)
// LEVELS cycles after it enters the root; a read must be answered at the
// root 2*LEVELS+1 cycles after the request with the addressed leaf's data,
// in request order, with one request per cycle accepted.
module tb_htree;
  import sparse_pkg::*;
  localparam int NPE = 16, LEVELS = 2;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_req = 0, rd_valid, xw_map_en;
  tree_wr_t wr;
  logic [7:0] rd_pe = '0;
  logic [ADDR_W-1:0] rd_addr = '0, xw_addr, xr_addr;
  chunk_t rd_data, xw_data;
  nzmap_t rd_map, xw_map;
  logic [NPE-1:0] xw_en, bm_wr, xr_en;
  chunk_t xr_data [NPE];
  nzmap_t xr_map [NPE];
  always #5 clk = ~clk;

  htree #(.NPE(NPE), .LEVELS(LEVELS)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // leaf model: a chunk per (leaf, address) is a function of both; reads
  // answer one cycle after xr_en
  function automatic chunk_t leaf_chunk(int p, int a);
    chunk_t c;
    for (int e = 0; e < 32; e++) c[e] = fp16_t'(p * 4099 + a * 31 + e);
    return c;
  endfunction
  always @(posedge clk)
    for (int p = 0; p < NPE; p++)
      if (xr_en[p]) begin
        xr_data[p] <= leaf_chunk(p, int'(xr_addr));
        xr_map[p]  <= nzmap_t'(p * 7 + int'(xr_addr));
      end

  // expected events, keyed by cycle
  typedef struct { int t; bit bm; bit bc; int dst; int addr; logic [15:0] tag; } wexp_t;
  typedef struct { int t; int pe; int addr; } rexp_t;
  wexp_t wq [$];
  rexp_t rq [$];

  wexp_t w;
  rexp_t r;
  always @(negedge clk) if (rst_n) begin
    // writes arriving at the leaves
    if (wq.size() > 0 && wq[0].t == int'(cycle)) begin
      w = wq.pop_front();
      for (int p = 0; p < NPE; p++) begin
        checks++;
        if ((w.bm ? bm_wr[p] : xw_en[p]) != (w.bc || w.dst == p) || (w.bm ? xw_en[p] : bm_wr[p])) begin
          failures++; $display("write decode wrong at leaf %0d", p);
        end
      end
      checks++;
      if (xw_data[0] != w.tag || (!w.bm && xw_addr != ADDR_W'(w.addr))) begin
        failures++; $display("write payload wrong");
      end
    end else begin
      checks++;
      if (xw_en != 0 || bm_wr != 0) begin failures++; $display("spurious write"); end
    end
    // read answers at the root
    if (rq.size() > 0 && rq[0].t == int'(cycle)) begin
      r = rq.pop_front();
      checks++;
      if (!rd_valid || rd_data != leaf_chunk(r.pe, r.addr) || rd_map != nzmap_t'(r.pe * 7 + r.addr)) begin
        failures++; $display("read answer wrong (pe %0d addr %0d)", r.pe, r.addr);
      end
    end else begin
      checks++;
      if (rd_valid) begin failures++; $display("spurious rd_valid"); end
    end
    // new traffic
    wr_valid = 0; rd_req = 0;
    if (cycle < 3000) begin
      if ($urandom_range(2) != 0) begin
        wr = '0;
        wr.bcast = ($urandom_range(3) == 0);
        wr.is_bm = ($urandom_range(4) == 0);
        wr.dst = 8'($urandom_range(NPE - 1));
        wr.addr = ADDR_W'($urandom);
        wr.data[0] = 16'($urandom);
        wr_valid = 1;
        wq.push_back('{t: int'(cycle) + LEVELS, bm: wr.is_bm, bc: wr.bcast, dst: int'(wr.dst),
                       addr: int'(wr.addr), tag: wr.data[0]});
      end
      if ($urandom_range(2) != 0) begin
        rd_req = 1; rd_pe = 8'($urandom_range(NPE - 1)); rd_addr = ADDR_W'($urandom);
        rq.push_back('{t: int'(cycle) + 2 * LEVELS + 1, pe: int'(rd_pe), addr: int'(rd_addr)});
      end
    end
  end

  initial begin
    wr = '0;
    for (int p = 0; p < NPE; p++) begin xr_data[p] = '0; xr_map[p] = '0; end
    #22 rst_n = 1;
    wait (cycle > 3020);
    checks++;
    if (wq.size() != 0 || rq.size() != 0) begin failures++; $display("lost traffic"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
