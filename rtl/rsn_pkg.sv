// rsn_pkg -- types, instruction formats and FP32 arithmetic shared by the
// RSN-XNN datapath.
//
// The datapath is a circuit-switched network of stateful functional units
// (FUs). Each FU is driven by its own sequence of micro-operations (uOPs).
// The program is one stream of packets: a 32-bit header (opcode = FU type,
// mask = which instances of that type, last = FU exit, window size = mOPs in
// the packet, reuse = how often the window is replayed) followed by
// window-size macro-operations (mOPs). Those five header fields follow the
// paper; their bit positions and widths, and the 96-bit mOP/uOP size, are
// this design's choice.
//
// Data words are IEEE-754 single precision (the paper runs FP32). fp_mul and
// fp_add round to nearest even; subnormal inputs and results are flushed to
// zero and NaN is not produced (Inf is). That simplification is this
// design's own.
package rsn_pkg;

  // ---------------------------------------------------------------- words
  localparam int unsigned WORD_W   = 32;   // one FP32 element per stream beat
  localparam int unsigned UOP_W    = 96;   // mOP and uOP payload width
  localparam int unsigned MOP_WORDS = UOP_W / 32;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [UOP_W-1:0]  uop_bits_t;

  // ---------------------------------------------------------------- header
  typedef enum logic [3:0] {
    OP_DDR   = 4'd0,
    OP_LPDDR = 4'd1,
    OP_MEMA  = 4'd2,
    OP_MEMB  = 4'd3,
    OP_MEMC  = 4'd4,
    OP_MESHA = 4'd5,
    OP_MESHB = 4'd6
  } fu_type_e;

  typedef struct packed {
    logic [3:0]  opcode;   // fu_type_e
    logic [7:0]  mask;     // bit i selects instance i of that FU type
    logic        last;     // FU exits after this packet
    logic [5:0]  window;   // number of mOPs in the packet (1..63)
    logic [12:0] reuse;    // times the window is issued (1..8191)
  } pkt_hdr_t;

  // Flat numbering of the PL FUs that take uOPs from the decoder unit.
  localparam int unsigned N_MEMA = 3;
  localparam int unsigned N_MEMB = 3;
  localparam int unsigned N_MEMC = 6;
  localparam int unsigned N_MME  = 6;
  localparam int unsigned FU_DDR   = 0;
  localparam int unsigned FU_LPDDR = 1;
  localparam int unsigned FU_MEMA0 = 2;
  localparam int unsigned FU_MEMB0 = FU_MEMA0 + N_MEMA;   // 5
  localparam int unsigned FU_MEMC0 = FU_MEMB0 + N_MEMB;   // 8
  localparam int unsigned FU_MESHA = FU_MEMC0 + N_MEMC;   // 14
  localparam int unsigned FU_MESHB = FU_MESHA + 1;        // 15
  localparam int unsigned N_FU     = FU_MESHB + 1;        // 16

  // Entry of a level-1 -> level-2 FIFO: a header or an mOP.
  typedef struct packed {
    logic      is_hdr;
    uop_bits_t bits;      // header in bits[31:0] when is_hdr
  } mop_ent_t;

  // Entry of a level-2 -> level-3 FIFO.
  typedef struct packed {
    logic      last;      // FU exits after this uOP
    uop_bits_t bits;
  } uop_ent_t;

  // ---------------------------------------------------------------- uOPs
  // Control planes follow Table 2 of the paper; field widths are assumed.
  typedef struct packed {
    logic [31:0] addr;           // word address of the first element
    logic [15:0] stride_size;    // words per stride (burst)
    logic [15:0] stride_offset;  // address step between strides, in words
    logic [15:0] stride_count;   // number of strides
    logic        load;           // off-chip -> destFU
    logic        store;          // srcFU -> off-chip
    logic [2:0]  dest;           // 0..2 MemA0-2, 3..5 MemB0-2
    logic [2:0]  src;            // 0..5 MemC0-5
    logic [7:0]  pad;
  } ddr_uop_t;

  typedef struct packed {
    logic [31:0] addr;
    logic [15:0] stride_size;
    logic [15:0] stride_offset;
    logic [15:0] stride_count;
    logic [2:0]  dest;           // 0..2 MemB0-2
    logic        load_bias;
    logic [11:0] pad;
  } lpddr_uop_t;

  typedef struct packed {
    logic [15:0] rows;           // tile rows (M of the tile)
    logic [15:0] cols;           // tile columns (K of the tile)
    logic [15:0] reps;           // each row is sent reps times (N of the tile)
    logic [2:0]  src;            // 0 = DDR (only source in this datapath)
    logic        load;
    logic        send;
    logic [42:0] pad;
  } mema_uop_t;

  typedef struct packed {
    logic [15:0] rows;           // K of the tile
    logic [15:0] cols;           // N of the tile
    logic [15:0] reps;           // whole tile is sent reps times (M of the tile)
    logic        load;
    logic        send;
    logic        transpose;      // incoming data is N x K, stored as K x N
    logic        bias;           // load: data is the bias row; send: append bias
    logic [43:0] pad;
  } memb_uop_t;

  typedef struct packed {
    logic [23:0] recv_len;       // words received from the MME
    logic [23:0] send_len;       // words sent to DDR or MeshA
    logic        recv;
    logic        send;
    logic        to_mme;         // send goes to MeshA (next layer) instead of DDR
    logic        softmax;
    logic        gelu;
    logic        norm;
    logic        transpose;      // send the tile column by column
    logic [15:0] tcols;          // columns of the received tile (transpose)
    logic [24:0] pad;
  } memc_uop_t;

  localparam int unsigned MESH_MAX_DST = 8;
  typedef struct packed {
    logic [23:0]                   size;  // beats per route
    logic [MESH_MAX_DST-1:0]       en;    // destination enabled
    logic [MESH_MAX_DST-1:0][3:0]  src;   // source feeding each destination
    logic [31:0]                   pad;
  } mesh_uop_t;

  // MME uOP: 4 bytes, as the paper gives for the AIE control input.
  typedef struct packed {
    logic [13:0] num;            // outputs produced
    logic [13:0] accumk;         // products summed per output
    logic        bias;           // add one RHS word per output
    logic        addprev;        // add one LHS word per output (previous layer)
    logic        scale;          // multiply by one RHS word, add another
    logic        acck;           // keep partial sums for the next uOP to continue
  } mme_uop_t;

  // ---------------------------------------------------------------- FP32
  function automatic logic [4:0] lzc27(input logic [26:0] v);
    logic [4:0] n;
    n = 5'd27;
    for (int i = 0; i < 27; i++) if (v[i]) n = 5'(26 - i);
    return n;
  endfunction

  function automatic word_t fp_mul(input word_t a, input word_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb, m;
    logic [47:0] p;
    logic signed [10:0] e;
    logic        g, st;
    logic [24:0] mr;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'hff || eb == 8'hff) return {s, 8'hff, 23'd0};
    if (ea == 8'd0  || eb == 8'd0)  return {s, 31'd0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m = p[47:24]; g = p[23]; st = |p[22:0]; e = e + 11'sd1;
    end else begin
      m = p[46:23]; g = p[22]; st = |p[21:0];
    end
    mr = {1'b0, m} + 25'((g && (st || m[0])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1; e = e + 11'sd1;
    end
    if (e >= 11'sd255) return {s, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic word_t fp_add(input word_t a, input word_t b);
    word_t       x, y;
    logic [7:0]  ex, ey, d;
    logic [26:0] A, B;
    logic [27:0] S;
    logic        st, g, r;
    logic [4:0]  sh;
    logic signed [10:0] e;
    logic [24:0] mr;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    if (a[30:23] == 8'd0)  return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0)  return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    d  = ex - ey;
    A  = {1'b1, x[22:0], 3'b000};
    B  = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) B = 27'd1;                        // only the sticky bit remains
    else if (d != 8'd0) begin
      st = 1'b0;
      for (int i = 0; i < 27; i++) if (i < int'(d) && B[i]) st = 1'b1;
      B = (B >> d) | {26'd0, st};
    end
    e = 11'(ex);
    if (x[31] == y[31]) begin
      S = {1'b0, A} + {1'b0, B};
      if (S[27]) begin
        S = {1'b0, S[27:2], S[1] | S[0]};
        e = e + 11'sd1;
      end
    end else begin
      S = {1'b0, A} - {1'b0, B};
      if (S == 28'd0) return 32'd0;
      sh = lzc27(S[26:0]);
      S  = S << sh;
      e  = e - 11'(sh);
    end
    g  = S[2];
    r  = S[1] | S[0];
    mr = {1'b0, S[26:3]} + 25'((g && (r || S[3])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1; e = e + 11'sd1;
    end
    if (e >= 11'sd255) return {x[31], 8'hff, 23'd0};
    if (e <= 11'sd0)   return {x[31], 31'd0};
    return {x[31], e[7:0], mr[22:0]};
  endfunction

endpackage
