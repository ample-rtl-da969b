// ample_pkg: types, constants and arithmetic shared by the AMPLE accelerator.
//
// Holds the nodeslot state and precision encodings, the network-on-chip flit
// format used inside the Aggregation Engine, and the per-precision arithmetic
// (IEEE-754 single precision add, multiply and divide-by-count, plus integer
// forms for int8 and int4). Every feature element is carried as one 32-bit
// word: float elements in binary32, int8/int4 elements sign-extended.
// The three precisions and the head/body/tail packet structure follow the
// paper; the bit layout of every field is this design's own choice.
// Float arithmetic flushes subnormals to zero and truncates (no rounding);
// overflow saturates to infinity. NaN inputs are not treated specially.
package ample_pkg;

  localparam int unsigned DATA_W = 32;  // one feature element per word
  localparam int unsigned ADDR_W = 32;  // byte address into HBM / DRAM

  typedef enum logic [1:0] {
    PREC_FLOAT = 2'd0,
    PREC_INT8  = 2'd1,
    PREC_INT4  = 2'd2
  } precision_e;

  // Nodeslot life cycle (Table of the node scoreboard).
  typedef enum logic [1:0] {
    NS_EMPTY          = 2'd0,
    NS_PREFETCH       = 2'd1,
    NS_AGGREGATION    = 2'd2,
    NS_TRANSFORMATION = 2'd3
  } ns_state_e;

  typedef enum logic [1:0] {
    AGG_SUM  = 2'd0,
    AGG_MEAN = 2'd1
  } agg_func_e;

  typedef enum logic [1:0] {
    FLIT_HEAD = 2'd0,
    FLIT_BODY = 2'd1,
    FLIT_TAIL = 2'd2
  } flit_type_e;

  typedef struct packed {
    flit_type_e         ftype;
    logic [DATA_W-1:0]  data;
  } flit_t;

  // Payload of a head flit. Data packets go AGM -> AGC, result packets
  // AGC -> BM (column 0 of the mesh).
  typedef struct packed {
    logic [3:0] row;      // destination router row
    logic [3:0] col;      // destination router column
    logic [7:0] slot;     // nodeslot the packet belongs to
    logic       last;     // last neighbour of this node
    agg_func_e  func;     // aggregation function
    logic [3:0] bm_row;   // row of the Buffering Manager collecting results
    logic [2:0] chunk;    // which AGC_FEATURES-wide slice of the embedding
    logic [2:0] nchunks;  // number of slices (AGCs) allocated to the node
    logic [2:0] rsvd;
  } head_t;

  // Router port numbering. Rows grow towards SOUTH, columns towards EAST.
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_NORTH = 1;
  localparam int unsigned P_EAST  = 2;
  localparam int unsigned P_SOUTH = 3;
  localparam int unsigned P_WEST  = 4;

  // ---------------------------------------------------------------- float32
  function automatic logic [31:0] fp32_add(input logic [31:0] a_in, input logic [31:0] b_in);
    logic [31:0] a, b;
    logic [27:0] ma, mb, s;
    int unsigned d;
    int er;
    if (a_in[30:23] == 8'd0) return (b_in[30:23] == 8'd0) ? 32'h0 : b_in;
    if (b_in[30:23] == 8'd0) return a_in;
    if (b_in[30:0] > a_in[30:0]) begin a = b_in; b = a_in; end
    else begin a = a_in; b = b_in; end
    ma = {1'b0, 1'b1, a[22:0], 3'b000};
    d  = 32'(a[30:23]) - 32'(b[30:23]);
    mb = (d > 26) ? 28'd0 : ({1'b0, 1'b1, b[22:0], 3'b000} >> d);
    s  = (a[31] == b[31]) ? ma + mb : ma - mb;
    if (s == 28'd0) return 32'h0;
    er = int'(a[30:23]);
    if (s[27]) begin s = s >> 1; er = er + 1; end
    for (int i = 0; i < 27; i++) begin
      if (!s[26]) begin s = s << 1; er = er - 1; end
    end
    if (er >= 255) return {a[31], 8'hFF, 23'd0};
    if (er <= 0)   return 32'h0;
    return {a[31], er[7:0], s[25:3]};
  endfunction

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic [47:0] m;
    logic [22:0] f;
    int e;
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return 32'h0;
    m = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (m[47]) begin f = m[46:24]; e = e + 1; end
    else       f = m[45:23];
    if (e >= 255) return {a[31] ^ b[31], 8'hFF, 23'd0};
    if (e <= 0)   return 32'h0;
    return {a[31] ^ b[31], e[7:0], f};
  endfunction

  // a / n for an unsigned integer count n >= 1 (used by the mean aggregator).
  function automatic logic [31:0] fp32_div_count(input logic [31:0] a, input logic [15:0] n);
    logic [47:0] q;
    int p, e;
    if (a[30:23] == 8'd0 || n == 16'd0) return 32'h0;
    q = {1'b1, a[22:0], 24'd0} / {32'd0, n};
    p = 0;
    for (int i = 0; i < 48; i++) if (q[i]) p = i;
    e = int'(a[30:23]) - 47 + p;
    q = q >> (p - 23);
    if (e <= 0) return 32'h0;
    return {a[31], e[7:0], q[22:0]};
  endfunction

  // --------------------------------------------------- precision dispatch
  function automatic logic [31:0] prec_add(input precision_e p, input logic [31:0] a, input logic [31:0] b);
    return (p == PREC_FLOAT) ? fp32_add(a, b) : a + b;
  endfunction

  function automatic logic [31:0] prec_mul(input precision_e p, input logic [31:0] a, input logic [31:0] b);
    return (p == PREC_FLOAT) ? fp32_mul(a, b) : 32'($signed(a) * $signed(b));
  endfunction

  function automatic logic [31:0] prec_div_count(input precision_e p, input logic [31:0] a, input logic [15:0] n);
    if (n == 16'd0) return a;
    return (p == PREC_FLOAT) ? fp32_div_count(a, n) : 32'($signed(a) / $signed({16'd0, n}));
  endfunction

endpackage
