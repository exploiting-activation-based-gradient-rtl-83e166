// sram_buffer: PE-local SRAM buffer.
//
// Four banks of 32 KB with 128-byte lines (128 KB per PE), as in the paper's
// component table. The datapath addresses the buffer in 64-byte chunks of 32
// binary16 values: chunk a lives in line a[10:1], half a[0]; lines are
// interleaved over the banks (bank = line[1:0]). Next to every chunk the
// buffer keeps its non-zero offset map (count + 32 five-bit offsets), written
// by the encoder and read together with the chunk, so one read delivers the
// 64 B of neurons and 20 B of offsets that a lane load needs.
// Ports: two read ports (A for the PE controller, B for the H-tree, e.g. the
// work-redistribution copy), one write port with a per-value write mask and a
// separate enable for the offset map. Reads have one cycle of latency.
// Modelled as arrays; the second read port and the side array for offset
// maps are this design's choices.
module sram_buffer
  import sparse_pkg::*;
#(
  parameter int unsigned BANKS      = 4,
  parameter int unsigned BANK_BYTES = 32768,
  parameter int unsigned LINE_BYTES = 128
) (
  input  logic                clk,
  // read port A
  input  logic                ra_en,
  input  logic [ADDR_W-1:0]   ra_addr,
  output chunk_t              ra_data,
  output nzmap_t              ra_map,
  // read port B
  input  logic                rb_en,
  input  logic [ADDR_W-1:0]   rb_addr,
  output chunk_t              rb_data,
  output nzmap_t              rb_map,
  // write port
  input  logic                w_en,
  input  logic [ADDR_W-1:0]   w_addr,
  input  logic [ENTRIES-1:0]  w_mask,
  input  chunk_t              w_data,
  input  logic                w_map_en,
  input  nzmap_t              w_map
);
  localparam int unsigned ROWS   = BANK_BYTES / LINE_BYTES;   // 256
  localparam int unsigned HALVES = LINE_BYTES / 64;           // chunks per line
  localparam int unsigned HB     = $clog2(HALVES);
  localparam int unsigned BB     = $clog2(BANKS);
  localparam int unsigned RB     = $clog2(ROWS);

  chunk_t mem  [BANKS][ROWS][HALVES];
  nzmap_t mapm [BANKS][ROWS][HALVES];

  function automatic logic [BB-1:0] bank_of(logic [ADDR_W-1:0] a);
    return a[HB +: BB];
  endfunction
  function automatic logic [RB-1:0] row_of(logic [ADDR_W-1:0] a);
    return a[HB+BB +: RB];
  endfunction
  function automatic logic [HB-1:0] half_of(logic [ADDR_W-1:0] a);
    return a[HB-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (ra_en) begin
      ra_data <= mem [bank_of(ra_addr)][row_of(ra_addr)][half_of(ra_addr)];
      ra_map  <= mapm[bank_of(ra_addr)][row_of(ra_addr)][half_of(ra_addr)];
    end
    if (rb_en) begin
      rb_data <= mem [bank_of(rb_addr)][row_of(rb_addr)][half_of(rb_addr)];
      rb_map  <= mapm[bank_of(rb_addr)][row_of(rb_addr)][half_of(rb_addr)];
    end
    if (w_en) begin
      for (int i = 0; i < ENTRIES; i++)
        if (w_mask[i]) mem[bank_of(w_addr)][row_of(w_addr)][half_of(w_addr)][i] <= w_data[i];
      if (w_map_en) mapm[bank_of(w_addr)][row_of(w_addr)][half_of(w_addr)] <= w_map;
    end
  end

  initial begin
    assert (BANKS * ROWS * HALVES == (1 << ADDR_W))
      else $error("sram_buffer: capacity does not match ADDR_W");
  end
endmodule
