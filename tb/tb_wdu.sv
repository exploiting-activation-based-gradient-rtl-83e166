// tb_wdu: checks the work redistribution unit (8 PEs).
//
// Random PE states (available, busy, last pass, pass number, cursor, end
// marker). The request must name the lowest-numbered available PE as source
// and, as target, the busy PE in its last pass whose progress tuple
// <pass, position> is smallest among those with at least 30 % of the tile
// left and two or more positions to go; the midpoint must leave the lower
// half (rounded up) with the target. Without an available source, a target,
// or with the unit disabled, there must be no request. On acceptance the
// target's end marker update must be raised for that PE only, and the
// redistribution counter must count it.
module tb_wdu;
  import sparse_pkg::*;
  localparam int NPE = 8;

  logic clk = 0, rst_n = 0, enable, req_valid, req_ready;
  logic [POS_W-1:0] tile_pos, req_mid, req_end, upd_end_pos;
  logic [NPE-1:0] avail, busy, last, upd_end_valid;
  logic [ITER_W-1:0] iter [NPE];
  logic [POS_W-1:0] pos [NPE];
  logic [POS_W-1:0] endp [NPE];
  logic [7:0] req_src, req_tgt;
  logic [ITER_W-1:0] req_iter;
  logic [31:0] n_redist;
  always #5 clk = ~clk;

  wdu #(.NPE(NPE)) dut (.*);

  int checks = 0, failures = 0, accepted = 0, requests = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 0; req_ready = 0; tile_pos = 0; avail = 0; busy = 0; last = 0;
    for (int p = 0; p < NPE; p++) begin iter[p] = 0; pos[p] = 0; endp[p] = 0; end
    #22 rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      automatic int src = -1, tgt = -1, tp;
      bit ev;
      @(negedge clk);
      tp = int'($urandom_range(195)) + 1;
      tile_pos = POS_W'(tp);
      enable = ($urandom_range(7) != 0);
      for (int p = 0; p < NPE; p++) begin
        avail[p] = ($urandom_range(5) == 0);
        busy[p]  = !avail[p] && ($urandom_range(3) != 0);
        last[p]  = ($urandom_range(2) != 0);
        iter[p]  = ITER_W'($urandom_range(3));
        pos[p]   = POS_W'($urandom_range(tp));
        endp[p]  = POS_W'($urandom_range(tp));
      end
      req_ready = 1'($urandom);
      for (int p = NPE - 1; p >= 0; p--) if (avail[p]) src = p;
      for (int p = 0; p < NPE; p++) begin
        automatic int rem = int'(endp[p]) - int'(pos[p]);
        if (busy[p] && last[p] && rem > 0 && rem * 100 >= tp * 30 &&
            (tgt < 0 || {iter[p], pos[p]} < {iter[tgt], pos[tgt]}))
          tgt = p;
      end
      ev = enable && src >= 0 && tgt >= 0 && (int'(endp[tgt]) - int'(pos[tgt])) >= 2;
      #1;
      checks++;
      if (req_valid != ev) begin failures++; $display("req_valid %0d exp %0d", req_valid, ev); end
      else if (ev) begin
        automatic int rem = int'(endp[tgt]) - int'(pos[tgt]);
        automatic int mid = int'(pos[tgt]) + (rem + 1) / 2;
        requests++;
        checks++;
        if (int'(req_src) != src || int'(req_tgt) != tgt || int'(req_mid) != mid ||
            req_end != endp[tgt] || req_iter != iter[tgt]) begin
          failures++;
          $display("request src %0d tgt %0d mid %0d, exp %0d %0d %0d", req_src, req_tgt, req_mid, src, tgt, mid);
        end
      end
      checks++;
      if (upd_end_valid != ((ev && req_ready) ? NPE'(1) << tgt : '0) ||
          ((ev && req_ready) && upd_end_pos != req_mid)) begin
        failures++; $display("end marker update wrong");
      end
      if (ev && req_ready) accepted++;
    end
    @(negedge clk);
    checks++;
    if (int'(n_redist) != accepted) begin failures++; $display("n_redist %0d exp %0d", n_redist, accepted); end
    $display("%0d requests, %0d accepted", requests, accepted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
