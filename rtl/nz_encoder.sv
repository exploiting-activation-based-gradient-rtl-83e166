// nz_encoder: non-zero offset encoder of a PE.
//
// Builds the offset map of one 32-entry chunk taken through the channel
// dimension: the positions of the non-zero values, in ascending order, and
// their count. It follows the flow chart of the paper: start, read the next
// entry, if it is zero read the next one, otherwise store its index. One entry
// is examined per cycle, so a chunk takes 32 cycles after start; done pulses
// for one cycle with the finished map. start is ignored while busy.
// Zero means a binary16 value with a zero exponent field (+0, -0, and the
// subnormals, which the datapath flushes to zero) - this design's choice.
module nz_encoder
  import sparse_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  chunk_t din,
  output logic   busy,
  output logic   done,
  output nzmap_t map
);
  chunk_t            buf_q;
  logic [CNT_W-1:0]  rd_q;      // next entry to read (0..32)
  nzmap_t            acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      rd_q  <= '0;
      buf_q <= '0;
      acc_q <= '0;
      map   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin            // Start
          busy  <= 1'b1;
          buf_q <= din;
          rd_q  <= '0;
          acc_q <= '0;
        end
      end else begin                // Read Next / Is Zero? / Store Index
        if (!fp16_is_zero(buf_q[rd_q[OFF_W-1:0]])) begin
          acc_q.idx[acc_q.cnt[OFF_W-1:0]] <= rd_q[OFF_W-1:0];
          acc_q.cnt                       <= acc_q.cnt + 1'b1;
        end
        rd_q <= rd_q + 1'b1;
        if (rd_q == CNT_W'(ENTRIES - 1)) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          map.idx  <= acc_q.idx;
          map.cnt  <= acc_q.cnt;
          if (!fp16_is_zero(buf_q[rd_q[OFF_W-1:0]])) begin
            map.idx[acc_q.cnt[OFF_W-1:0]] <= rd_q[OFF_W-1:0];
            map.cnt                       <= acc_q.cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
