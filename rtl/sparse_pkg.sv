// sparse_pkg: types and constants shared by the sparse CNN training node.
//
// The node is a 16x16 grid of processing elements (PEs). Each PE has 16
// computation lanes; each lane holds 32 entries per buffer group, and an
// offset (non-zero index) entry is 5 bits wide. These numbers follow the
// paper's PE description and component table. Everything else here
// (configuration fields, widths of counters and addresses, the result
// record) is this design's own choice, sized for ImageNet-class layers.
package sparse_pkg;

  // ---- Sizes given by the paper ----
  localparam int unsigned LANES   = 16;  // computation lanes per PE
  localparam int unsigned ENTRIES = 32;  // entries per register lane and group
  localparam int unsigned GROUPS  = 2;   // double-buffer groups
  localparam int unsigned OFF_W   = 5;   // bits per non-zero offset index

  // ---- Design choices ----
  localparam int unsigned CNT_W    = 6;   // 0..32 non-zero entries in a chunk
  localparam int unsigned ADDR_W   = 11;  // chunk address in the PE buffer (2048 chunks of 64 B)
  localparam int unsigned MAX_TU   = 14;  // largest output tile height per PE
  localparam int unsigned MAX_TV   = 14;  // largest output tile width per PE
  localparam int unsigned MAX_POS  = MAX_TU * MAX_TV;
  localparam int unsigned POS_W    = 8;   // flat position x*MAX_TV + y (0..196)
  localparam int unsigned KCH_W    = 10;  // chunk index within one receptive field
  localparam int unsigned MAX_KCH  = 512; // longest receptive field, in 32-entry chunks
  localparam int unsigned ITER_W   = 5;   // synapse-blocking pass number
  localparam int unsigned M_W      = 10;  // filter number
  localparam int unsigned COORD_W  = 8;   // global output coordinate

  typedef logic [15:0] fp16_t;                       // IEEE 754 binary16
  typedef fp16_t [ENTRIES-1:0] chunk_t;              // 32 values = 64 B
  typedef logic [OFF_W-1:0] off_t;

  // Non-zero offset map of one 32-entry chunk, as produced by the encoder.
  typedef struct packed {
    logic [CNT_W-1:0]         cnt;   // number of non-zero entries
    off_t [ENTRIES-1:0]       idx;   // idx[0..cnt-1]: offsets, ascending
  } nzmap_t;

  typedef enum logic [0:0] {
    MODE_FP = 1'b0,   // forward: every output computed, ReLU applied, bitmap produced
    MODE_BP = 1'b1    // backward: only outputs whose bitmap bit is set are computed
  } mode_e;

  // Per-layer configuration of a PE (identical in every PE of the node).
  typedef struct packed {
    mode_e              mode;
    logic               in_sparse;  // 1: skip zero inputs using the offset map
    logic [3:0]         tu;         // output tile height (1..14)
    logic [3:0]         tv;         // output tile width  (1..14)
    logic [2:0]         r;          // filter height (1..7)
    logic [2:0]         s;          // filter width  (1..7)
    logic [5:0]         cch;        // input channels / 32
    logic [5:0]         mch;        // output channels / 32 (partial-sum layout)
    logic [ADDR_W-1:0]  neur_base;  // input tile (with halo), channel-first
    logic [ADDR_W-1:0]  syn_base;   // current filter, channel-first
    logic [ADDR_W-1:0]  out_base;   // partial sums, channel-first
  } layer_cfg_t;

  // One finished output value leaving a PE.
  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [M_W-1:0]     m;
    fp16_t              value;
    logic               nz;         // output bitmap bit (ReLU footprint)
  } result_t;

  // Work markers of a PE for one filter: <iter, pos> start and end.
  typedef struct packed {
    logic [ITER_W-1:0]  start_iter;
    logic [POS_W-1:0]   start_pos;
    logic [POS_W-1:0]   end_pos;    // exclusive, applies to every pass
    logic [COORD_W-1:0] org_x;      // global coordinate of tile position (0,0)
    logic [COORD_W-1:0] org_y;
    logic [ADDR_W-1:0]  boff;       // buffer offset of the tile data (0, or the
                                    // area holding redistributed work)
  } markers_t;

  // Packet on the H-tree write network (node controller -> PE buffers).
  typedef struct packed {
    logic               bcast;      // to every PE
    logic [7:0]         dst;        // PE number when not broadcast
    logic               is_bm;      // data[MAX_POS-1:0] is an output bitmap
    logic [ADDR_W-1:0]  addr;
    chunk_t             data;
    logic               map_en;     // also write the chunk's offset map
    nzmap_t             map;
  } tree_wr_t;

  // Layer descriptor given to the node.
  typedef struct packed {
    layer_cfg_t         cfg;
    logic [M_W-1:0]     nfilt;        // number of filters M
    logic [ADDR_W-1:0]  in_chunks;    // input tile chunks per PE (with halo)
    logic [ADDR_W-1:0]  copy_chunks;  // buffer chunks copied on redistribution
    logic [31:0]        in_base;      // DRAM chunk address of PE 0's input tile
    logic [31:0]        w_base;       // DRAM chunk address of filter 0
    logic [31:0]        bm_base;      // DRAM chunk address of bitmap (m=0, PE 0)
    logic               redist_en;    // work redistribution on/off
  } layer_desc_t;

  // Zero test of a binary16 value (subnormals count as zero: flush to zero).
  function automatic logic fp16_is_zero(fp16_t v);
    return v[14:10] == 5'd0;
  endfunction

  // Binary16 product, rounded to nearest even. Subnormal inputs and results
  // are flushed to zero, overflow gives infinity, NaN is never produced.
  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    fp16_t       p;
    logic        sgn;
    logic [21:0] prod;
    logic [10:0] m;
    logic        g, st, up;
    logic [11:0] mr;
    logic signed [7:0] e;

    sgn  = a[15] ^ b[15];
    prod = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e    = $signed({3'b0, a[14:10]}) + $signed({3'b0, b[14:10]}) - 8'sd15;
    if (prod[21]) begin
    m  = prod[21:11];
    g  = prod[10];
    st = |prod[9:0];
    e  = e + 8'sd1;
    end else begin
    m  = prod[20:10];
    g  = prod[9];
    st = |prod[8:0];
    end
    up = g & (st | m[0]);
    mr = {1'b0, m} + {11'd0, up};
    if (mr[11]) begin
    mr = {1'b0, 1'b1, 10'd0};
    e  = e + 8'sd1;
    end
    if (fp16_is_zero(a) || fp16_is_zero(b) || e <= 8'sd0)
    p = {sgn, 15'd0};
    else if (e >= 8'sd31)
    p = {sgn, 5'h1f, 10'd0};
    else
    p = {sgn, e[4:0], mr[9:0]};
    return p;
  endfunction

  // Binary16 sum: the smaller operand is aligned with guard, round and sticky
  // bits, the result is normalised and rounded to nearest even. Subnormals are
  // flushed to zero, overflow gives infinity.
  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       y;
    fp16_t       big, sml;
    logic [4:0]  d;
    logic [13:0] mb, ms, ms_sh;
    logic        st, up, found;
    logic [14:0] sum;
    logic signed [7:0] e;
    logic [4:0]  lz;
    logic [11:0] mr;

    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    mb = {1'b1, big[9:0], 3'b000};
    ms = {1'b1, sml[9:0], 3'b000};
    d  = big[14:10] - sml[14:10];
    st = 1'b0;
    if (d > 5'd13) begin
    ms_sh = 14'd1;   // only the sticky bit survives
    end else begin
    ms_sh = ms >> d;
    for (int i = 0; i < 14; i++)
      if (i < int'(d) && ms[i]) st = 1'b1;
    ms_sh[0] = ms_sh[0] | st;
    end
    e  = $signed({3'b0, big[14:10]});
    lz = 5'd0;
    if (big[15] == sml[15]) sum = {1'b0, mb} + {1'b0, ms_sh};
    else                    sum = {1'b0, mb} - {1'b0, ms_sh};
    if (sum[14]) begin
    sum = {1'b0, sum[14:2], sum[1] | sum[0]};
    e   = e + 8'sd1;
    end else begin
    found = 1'b0;
    for (int i = 13; i >= 0; i--)
      if (!found && sum[i]) begin
        lz    = 5'(13 - i);
        found = 1'b1;
      end
    sum = sum << lz;
    e   = e - $signed({3'b0, lz});
    end
    up = sum[2] & (sum[1] | sum[0] | sum[3]);
    mr = {1'b0, sum[13:3]} + {11'd0, up};
    if (mr[11]) begin
    mr = {2'b01, 10'd0};
    e  = e + 8'sd1;
    end
    if (fp16_is_zero(big))
    y = 16'd0;                          // both operands zero
    else if (fp16_is_zero(sml))
    y = big;
    else if (sum[13:0] == '0 || e <= 8'sd0)
    y = 16'd0;
    else if (e >= 8'sd31)
    y = {big[15], 5'h1f, 10'd0};
    else
    y = {big[15], e[4:0], mr[9:0]};
    return y;
  endfunction

endpackage
