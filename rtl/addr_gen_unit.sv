// addr_gen_unit: output-bitmap driven input address generator of a PE.
//
// Holds the output bitmap slice of the PE's tile (one bit per output
// position, flat position = x*14 + y). In the backward pass only positions
// whose bit is set are computed (output sparsity); in the forward pass every
// position of the tile is. The "identify non-zero bitmap index" stage is a
// combinational priority search: given a cursor and an end marker it returns
// the first computable position at or after the cursor, and its (x, y).
//
// The "input address generator" walks the receptive field of an output in
// the order of the paper's loop: for each filter row i, filter column j and
// channel c, load input (x+i, y+j, c). Channels are grouped in chunks of 32
// (channel-first layout), so receptive-field chunk k = (i*S + j)*C/32 + c/32.
// When a layer is configured (init), a table delta[k] = (i*TW + j)*C/32 + c/32
// is filled, one entry per cycle; afterwards the address of chunk k of output
// (x, y) is neur_base + (x*TW + y)*C/32 + delta[k], combinationally, where TW
// = TV + S - 1 is the width of the input tile including its halo (the tile
// index (x+i) already includes the -R/2 halo offset).
// The table and flat-position encoding are this design's choices.
module addr_gen_unit
  import sparse_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  // layer set-up
  input  logic               init,
  output logic               tbl_ready,
  output logic [KCH_W-1:0]   nchunk,      // receptive field length in chunks
  // bitmap
  input  logic               bm_wr,
  input  logic [MAX_POS-1:0] bm_data,
  // next non-zero output
  input  logic [POS_W-1:0]   q_pos,
  input  logic [POS_W-1:0]   q_end,
  output logic               f_found,
  output logic [POS_W-1:0]   f_pos,
  output logic [3:0]         f_x,
  output logic [3:0]         f_y,
  // input chunk address
  input  logic [3:0]         a_x,
  input  logic [3:0]         a_y,
  input  logic [KCH_W-1:0]   a_k,
  output logic [ADDR_W-1:0]  a_addr
);
  logic [MAX_POS-1:0]  bitmap_q;
  logic [ADDR_W-1:0]   delta [MAX_KCH];
  logic [2:0]          ti_q, tj_q;
  logic [5:0]          tc_q;
  logic [KCH_W-1:0]    tk_q;
  logic                busy_q;
  logic [4:0]          tw;

  assign tw     = 5'(cfg.tv) + 5'(cfg.s) - 5'd1;
  assign nchunk = KCH_W'(cfg.r) * KCH_W'(cfg.s) * KCH_W'(cfg.cch);

  // ---- bitmap and non-zero search ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     bitmap_q <= '0;
    else if (bm_wr) bitmap_q <= bm_data;
  end

  always_comb begin
    f_found = 1'b0;
    f_pos   = '0;
    for (int p = MAX_POS - 1; p >= 0; p--) begin
      if ((cfg.mode == MODE_FP || bitmap_q[p]) &&
          (p / MAX_TV) < int'(cfg.tu) && (p % MAX_TV) < int'(cfg.tv) &&
          p >= int'(q_pos) && p < int'(q_end)) begin
        f_found = 1'b1;
        f_pos   = POS_W'(p);
      end
    end
    f_x = 4'(f_pos / POS_W'(MAX_TV));
    f_y = 4'(f_pos % POS_W'(MAX_TV));
  end

  // ---- receptive-field table ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      tbl_ready <= 1'b0;
      ti_q <= '0; tj_q <= '0; tc_q <= '0; tk_q <= '0;
    end else if (init) begin
      busy_q    <= 1'b1;
      tbl_ready <= 1'b0;
      ti_q <= '0; tj_q <= '0; tc_q <= '0; tk_q <= '0;
    end else if (busy_q) begin
      delta[tk_q[8:0]] <= ADDR_W'((32'(ti_q) * 32'(tw) + 32'(tj_q)) * 32'(cfg.cch) + 32'(tc_q));
      tk_q <= tk_q + 1'b1;
      if (tc_q + 1'b1 < cfg.cch) tc_q <= tc_q + 1'b1;
      else begin
        tc_q <= '0;
        if (tj_q + 1'b1 < cfg.s) tj_q <= tj_q + 1'b1;
        else begin
          tj_q <= '0;
          if (ti_q + 1'b1 < cfg.r) ti_q <= ti_q + 1'b1;
          else begin
            busy_q    <= 1'b0;
            tbl_ready <= 1'b1;
          end
        end
      end
    end
  end

  assign a_addr = cfg.neur_base
                + ADDR_W'((32'(a_x) * 32'(tw) + 32'(a_y)) * 32'(cfg.cch))
                + delta[a_k[8:0]];
endmodule
