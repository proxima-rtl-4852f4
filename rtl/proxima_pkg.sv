// proxima_pkg: types, constants and FP16 helpers shared by the accelerator.
//
// The accelerator keeps every distance in IEEE half precision (FP16), as its
// PQ module and distance units are built from FP16 multiply-accumulate units.
// The FP16 helpers here are combinational: subnormals are flushed to zero,
// results are truncated (rounded toward zero) and overflow saturates to the
// largest finite value. That rounding choice is this design's own; the paper
// only says the MACs are FP16.
//
// Memory traffic between the search engine and the 3D NAND cores moves in
// 128-byte granules, the data granularity that a 32:1 bit-line multiplexer
// gives on a 32768-bit page.
package proxima_pkg;

  // ---- geometry from the paper ----
  localparam int unsigned VID_W     = 30;    // vertex id width (1B vertices fit)
  localparam int unsigned GRAN_BITS = 1024;  // 128 B granule = 32768 BL / 32:1 MUX
  localparam int unsigned N_BL      = 32768; // bit lines per page
  localparam int unsigned MUX_RATIO = 32;    // BL MUX ratio
  localparam int unsigned SEG_W     = 5;     // log2(MUX_RATIO)
  localparam int unsigned PQ_M      = 32;    // PQ subspaces
  localparam int unsigned PQ_C      = 256;   // centroids per subspace
  localparam int unsigned PQ_BITS   = PQ_M * 8; // 256-b PQ code
  localparam int unsigned PAGE_W    = 24;    // page address width in a core
  localparam int unsigned TAG_W     = 8;     // queue tag width (N_q = 256)

  typedef logic [15:0] fp16_t;
  typedef logic [VID_W-1:0] vid_t;

  typedef enum logic [1:0] {REQ_NN = 2'd0, REQ_PQ = 2'd1, REQ_RAW = 2'd2} req_kind_e;
  typedef enum logic [0:0] {MET_L2 = 1'b0, MET_IP = 1'b1} metric_e;
  typedef enum logic [1:0] {OP_ADD = 2'd0, OP_SUB = 2'd1, OP_MUL = 2'd2, OP_MAC = 2'd3} mac_op_e;

  // request from a queue to the arbiter
  typedef struct packed {
    req_kind_e kind;
    vid_t      vid;
  } q_req_t;

  // physical read request travelling over the H-tree buses
  typedef struct packed {
    logic [TAG_W-1:0]  tag;   // requesting queue
    logic [8:0]        core;  // global core id (tile * 32 + core)
    logic [PAGE_W-1:0] page;  // page (word line) inside the core
    logic [SEG_W-1:0]  seg;   // first 128 B segment on the page
    logic [5:0]        nseg;  // number of consecutive segments (1..32)
  } mem_req_t;

  // one granule returned to a queue
  typedef struct packed {
    logic [TAG_W-1:0]     tag;
    logic [8:0]           core;  // core that produced it
    logic                 last;  // last granule of the request
    logic [GRAN_BITS-1:0] data;
  } mem_rsp_t;

  // graph layout and search parameters, written once by the host
  typedef struct packed {
    metric_e     metric;
    logic [2:0]  dsub;        // D / M (1..4)
    logic [7:0]  dim;         // D (<= 128)
    logic [6:0]  r_deg;       // maximum degree R (<= 64)
    logic [5:0]  w0;          // width of the first neighbour index
    logic [5:0]  wgap;        // width of one gap
    vid_t        n_hot;       // vertices 0..n_hot-1 have a hot frame
    logic [5:0]  g_nn;        // granules per normal frame
    logic [2:0]  fpp_nn_lg;   // log2 normal frames per page
    logic [5:0]  g_hot;       // granules per hot frame
    logic [2:0]  fpp_hot_lg;
    logic [PAGE_W-1:0] hot_base;
    logic [5:0]  g_raw;       // granules per raw vector
    logic [2:0]  fpp_raw_lg;
    logic [8:0]  l_size;      // candidate list size L (<= 256)
    logic [8:0]  t_init;      // initial search list size T
    logic [8:0]  t_step;      // T_step
    logic [3:0]  rep;         // repetition rate r
    logic [4:0]  k;           // k of k-NN (<= 16)
    fp16_t       beta;        // PQ error ratio
  } cfg_t;

  // ---- FP16 helpers ----
  localparam fp16_t FP16_MAXF = 16'h7BFF;

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    logic [9:0]  m;
    s = a[15] ^ b[15];
    if (a[14:10] == 0 || b[14:10] == 0) return {s, 15'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin m = p[20:11]; e = e + 1; end
    else       m = p[19:10];
    if (e <= 0)  return {s, 15'd0};
    if (e >= 31) return {s, FP16_MAXF[14:0]};
    return {s, e[4:0], m};
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [13:0] mx, my;
    logic [14:0] sum;
    int          d, e, lz;
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    if (x[14:10] == 0) return 16'd0;
    if (y[14:10] == 0) return x;
    d  = int'(x[14:10]) - int'(y[14:10]);
    mx = {1'b1, x[9:0], 3'b000};
    my = (d > 13) ? 14'd0 : ({1'b1, y[9:0], 3'b000} >> d);
    e  = int'(x[14:10]);
    if (x[15] == y[15]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[14]) begin sum = sum >> 1; e = e + 1; end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 0) return 16'd0;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - lz;
    end
    if (e <= 0)  return 16'd0;
    if (e >= 31) return {x[15], FP16_MAXF[14:0]};
    return {x[15], e[4:0], sum[12:3]};
  endfunction

  function automatic fp16_t fp16_neg(fp16_t a);
    return (a[14:0] == 0) ? 16'd0 : {~a[15], a[14:0]};
  endfunction

  // Maps an FP16 value to an unsigned key with the same order.
  function automatic logic [15:0] fp16_key(fp16_t a);
    return a[15] ? ~a : (a | 16'h8000);
  endfunction

  localparam logic [15:0] KEY_EMPTY = 16'hFFFF;

  function automatic int unsigned clog2i(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
