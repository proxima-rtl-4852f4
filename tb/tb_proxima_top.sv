// tb_proxima_top: end-to-end test of the accelerator on a small graph.
//
// The testbench builds a random data set of NV vectors of D = 32 FP16
// elements, a PQ codebook (M = 32 subspaces of one element each, centroid c
// of every subspace is (c - 128) / 8), each vector's PQ code, and a graph in
// which every vertex links to its 6 nearest neighbours plus 2 random
// vertices. It writes the gap-encoded neighbour frames, the hot frames of
// the first NHOT vertices and the raw vectors into the NAND cores through
// the program port, at the addresses the layout rules give (worked out here
// independently of the address translator). It then streams NQRY queries,
// up to NQ at a time, and checks every result against a brute-force search
// in real arithmetic:
//   - the k returned ids are distinct, valid vertices;
//   - the returned distances are ascending and equal (within FP16 accuracy)
//     to the exact squared L2 distances of the returned ids;
//   - the overall recall of the true k nearest neighbours is at least 0.75.
// The small geometry (4 queues, 2 tiles of 4 cores, a 32-slot list, short
// NAND timing) keeps the run short while making every mechanism happen:
// arbiter stalls, candidate-list overflow flushes, early termination,
// dynamic-list growth, hot-frame fetches, Bloom-filter skips, reranks and
// sorts. Each counter must end above zero. A watchdog ends the run.
module tb_proxima_top;
  import proxima_pkg::*;
  import tb_util_pkg::*;

  localparam int NQ = 4, N_TILES = 2, N_CORE = 4, NR = 4, PAGES = 4;
  localparam int T_READ = 20, T_SEG = 4, KMAX = 16, NSLOT = 32;
  localparam int NV = 64, NQRY = 12, L_SIZE = 28, T_INIT = 8;
  localparam int REP = 2;
  localparam bit CHECK_EVENTS = 1;
  localparam int WATCHDOG = 3_000_000;

  localparam int NC = N_TILES * N_CORE, NG = NC - NR;
  localparam int D = 32, DSUB = 1, R = 8, K = 4, NHOT = 4, ENTRY = 0;
  localparam int W0 = 8, WG = 8;
  localparam int G_NN = 1, FPP_NN = 5, G_HOT = 3, FPP_HOT = 3, HOT_BASE = 1, G_RAW = 1, FPP_RAW = 5;
  localparam int FRW = G_HOT * GRAN_BITS;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic cb_we = 0; logic [4:0] cb_m = 0; logic [7:0] cb_c = 0; logic [1:0] cb_j = 0; fp16_t cb_wdata = 0;
  logic qry_ready; logic qv_we = 0; logic [6:0] qv_idx = 0; fp16_t qv_data = 0;
  logic qry_go = 0; vid_t qry_entry = 0;
  logic [$clog2(NQ)-1:0] qry_qid, res_qid;
  logic res_valid;
  vid_t [KMAX-1:0] res_ids;
  fp16_t [KMAX-1:0] res_dist;
  logic prog_en = 0; logic [8:0] prog_core = 0; logic [PAGE_W-1:0] prog_page = 0;
  logic [SEG_W-1:0] prog_seg = 0; logic [GRAN_BITS-1:0] prog_data = 0;
  logic [31:0] cnt_flush, cnt_et, cnt_hot, cnt_skip, cnt_dyn, cnt_rerank, cnt_stall, cnt_sort;

  proxima_top #(.NQ(NQ), .N_TILES(N_TILES), .N_CORE(N_CORE), .N_RAW_CORES(NR), .PAGES(PAGES),
                .T_READ(T_READ), .T_SEG(T_SEG), .KMAX(KMAX), .NSLOT(NSLOT)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_done = 0, hits = 0, wanted = 0;

  real        vec  [NV][D];
  logic [7:0] code [NV][32];
  int         nbr  [NV][R];
  real        qry  [NQRY][D];
  int         owner [NQ];

  function automatic real dist2(real a [D], real b [D]);
    real s = 0.0;
    for (int i = 0; i < D; i++) s += (a[i] - b[i]) * (a[i] - b[i]);
    return s;
  endfunction

  // ---- codebook ----
  // DSUB = 1: centroid c of every subspace is (c - 128) / 8.
  // DSUB = 4: element j of centroid c is level ((c >> 2j) & 3) of
  //           {-0.75, -0.25, 0.25, 0.75}.
  function automatic real centroid(int c, int j);
    if (DSUB == 1) return real'(c - 128) / 8.0;
    return (real'((c >> (2 * j)) & 3) - 1.5) * 0.5;
  endfunction

  function automatic int nearest_level(real x);
    int l;
    if (DSUB == 1) begin
      l = int'($floor(x * 8.0 + 0.5)) + 128;
      return (l < 0) ? 0 : (l > 255) ? 255 : l;
    end
    l = int'($floor(x * 2.0 + 2.0));
    return (l < 0) ? 0 : (l > 3) ? 3 : l;
  endfunction

  // ---- data set, codes and graph ----
  task automatic build();
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < D; i++)
        vec[v][i] = real'(int'($urandom % 128) - 64) / 64.0;
      for (int m = 0; m < 32; m++) begin
        int c = 0;
        if (DSUB == 1) c = nearest_level(vec[v][m]);
        else for (int j = 0; j < DSUB; j++) c |= nearest_level(vec[v][m*DSUB + j]) << (2 * j);
        code[v][m] = 8'(c);
      end
    end
    for (int v = 0; v < NV; v++) begin
      real dv [NV];
      bit  used [NV];
      int  cnt = 0;
      for (int u = 0; u < NV; u++) begin dv[u] = dist2(vec[v], vec[u]); used[u] = (u == v); end
      while (cnt < R - 2) begin
        int best = -1;
        for (int u = 0; u < NV; u++)
          if (!used[u] && (best < 0 || dv[u] < dv[best])) best = u;
        used[best] = 1; nbr[v][cnt++] = best;
      end
      while (cnt < R) begin
        int u = int'($urandom % NV);
        if (!used[u]) begin used[u] = 1; nbr[v][cnt++] = u; end
      end
      // sort ascending for gap encoding
      for (int a = 0; a < R; a++)
        for (int b = a + 1; b < R; b++)
          if (nbr[v][b] < nbr[v][a]) begin int t = nbr[v][a]; nbr[v][a] = nbr[v][b]; nbr[v][b] = t; end
    end
  endtask

  function automatic logic [255:0] pq_of(int v);
    logic [255:0] p;
    for (int m = 0; m < 32; m++) p[8*m +: 8] = code[v][m];
    return p;
  endfunction

  task automatic put(ref logic [FRW-1:0] fr, ref int pos, input logic [255:0] val, input int w);
    for (int i = 0; i < w; i++) fr[pos + i] = val[i];
    pos += w;
  endtask

  task automatic prog(int core, int page, int seg, logic [GRAN_BITS-1:0] data);
    @(negedge clk);
    prog_en = 1; prog_core = 9'(core); prog_page = PAGE_W'(page); prog_seg = SEG_W'(seg); prog_data = data;
    @(negedge clk);
    prog_en = 0;
  endtask

  task automatic load_graph();
    for (int v = 0; v < NV; v++) begin
      logic [FRW-1:0] fr;
      int pos, core, slot;
      // normal frame: i1, gaps, own PQ code
      fr = '0; pos = 0;
      put(fr, pos, 256'(nbr[v][0]), W0);
      for (int j = 1; j < R; j++) put(fr, pos, 256'(nbr[v][j] - nbr[v][j-1]), WG);
      put(fr, pos, pq_of(v), 256);
      core = NR + (v % NG); slot = v / NG;
      prog(core, slot >> FPP_NN, (slot % (1 << FPP_NN)) * G_NN, fr[GRAN_BITS-1:0]);
      // hot frame: i1, PQ(n1), g2, PQ(n2), ..., PQ(v)
      if (v < NHOT) begin
        fr = '0; pos = 0;
        put(fr, pos, 256'(nbr[v][0]), W0);
        put(fr, pos, pq_of(nbr[v][0]), 256);
        for (int j = 1; j < R; j++) begin
          put(fr, pos, 256'(nbr[v][j] - nbr[v][j-1]), WG);
          put(fr, pos, pq_of(nbr[v][j]), 256);
        end
        put(fr, pos, pq_of(v), 256);
        for (int g = 0; g < G_HOT; g++)
          prog(core, HOT_BASE + (slot >> FPP_HOT), (slot % (1 << FPP_HOT)) * G_HOT + g,
               fr[g*GRAN_BITS +: GRAN_BITS]);
      end
      // raw vector
      fr = '0;
      for (int i = 0; i < D; i++) fr[16*i +: 16] = r2f(vec[v][i]);
      core = v % NR; slot = v / NR;
      for (int g = 0; g < G_RAW; g++)
        prog(core, slot >> FPP_RAW, (slot % (1 << FPP_RAW)) * G_RAW + g, fr[g*GRAN_BITS +: GRAN_BITS]);
    end
  endtask

  task automatic load_codebook();
    for (int m = 0; m < 32; m++)
      for (int c = 0; c < 256; c++)
        for (int j = 0; j < DSUB; j++) begin
          @(negedge clk);
          cb_we = 1; cb_m = 5'(m); cb_c = 8'(c); cb_j = 2'(j); cb_wdata = r2f(centroid(c, j));
        end
    @(negedge clk) cb_we = 0;
  endtask

  // ---- result checking ----
  always @(posedge clk) if (rst_n && res_valid) begin
    automatic int qi = owner[res_qid];
    automatic real ex [NV];
    automatic real kth;
    automatic bit ok_ids = 1, ok_ord = 1, ok_dist = 1;
    for (int u = 0; u < NV; u++) ex[u] = dist2(qry[qi], vec[u]);
    // k-th smallest exact distance
    begin
      automatic real s [NV] = ex;
      s.sort();
      kth = s[K-1];
    end
    for (int i = 0; i < K; i++) begin
      if (res_ids[i] >= NV) ok_ids = 0;
      for (int j = 0; j < i; j++) if (res_ids[j] == res_ids[i]) ok_ids = 0;
      if (i > 0 && fp16_key(res_dist[i]) < fp16_key(res_dist[i-1])) ok_ord = 0;
      if (res_ids[i] < NV) begin
        if (!close(f2r(res_dist[i]), ex[res_ids[i]], 0.03, 0.05)) ok_dist = 0;
        if (ex[res_ids[i]] <= kth * 1.0001) hits++;
      end
    end
    wanted += K;
    checks += 3;
    if (!ok_ids)  begin failures++; $display("query %0d: bad ids", qi); end
    if (!ok_ord)  begin failures++; $display("query %0d: distances not ascending", qi); end
    if (!ok_dist) begin failures++; $display("query %0d: distance mismatch", qi); end
    n_done++;
  end

  initial begin
    #(10 * WATCHDOG);
    failures++;
    $display("watchdog: %0d of %0d queries done", n_done, NQRY);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.metric = MET_L2; cfg.dsub = 3'(DSUB); cfg.dim = 8'(D); cfg.r_deg = 7'(R);
    cfg.w0 = 6'(W0); cfg.wgap = 6'(WG); cfg.n_hot = vid_t'(NHOT);
    cfg.g_nn = 6'(G_NN); cfg.fpp_nn_lg = 3'(FPP_NN);
    cfg.g_hot = 6'(G_HOT); cfg.fpp_hot_lg = 3'(FPP_HOT); cfg.hot_base = PAGE_W'(HOT_BASE);
    cfg.g_raw = 6'(G_RAW); cfg.fpp_raw_lg = 3'(FPP_RAW);
    cfg.l_size = 9'(L_SIZE); cfg.t_init = 9'(T_INIT); cfg.t_step = 9'd4; cfg.rep = 4'(REP);
    cfg.k = 5'(K); cfg.beta = r2f(1.06);
    build();
    for (int q = 0; q < NQRY; q++)
      for (int i = 0; i < D; i++) qry[q][i] = real'(int'($urandom % 128) - 64) / 64.0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    load_codebook();
    load_graph();
    for (int q = 0; q < NQRY; q++) begin
      do @(negedge clk); while (!qry_ready);
      for (int i = 0; i < D; i++) begin
        qv_we = 1; qv_idx = 7'(i); qv_data = r2f(qry[q][i]);
        @(negedge clk);
      end
      qv_we = 0;
      owner[qry_qid] = q;
      qry_go = 1; qry_entry = vid_t'(ENTRY);
      @(negedge clk);
      qry_go = 0;
    end
    while (n_done < NQRY) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (real'(hits) < 0.75 * real'(wanted)) begin
      failures++; $display("recall too low: %0d of %0d", hits, wanted);
    end
    $display("recall %0d/%0d  flush=%0d et=%0d dyn=%0d hot=%0d skip=%0d rerank=%0d stall=%0d sort=%0d",
             hits, wanted, cnt_flush, cnt_et, cnt_dyn, cnt_hot, cnt_skip, cnt_rerank, cnt_stall, cnt_sort);
    if (CHECK_EVENTS) begin
    checks += 8;
    if (cnt_flush  == 0) begin failures++; $display("no overflow flush"); end
    if (cnt_et     == 0) begin failures++; $display("no early termination"); end
    if (cnt_dyn    == 0) begin failures++; $display("no dynamic list growth"); end
    if (cnt_hot    == 0) begin failures++; $display("no hot frame"); end
    if (cnt_skip   == 0) begin failures++; $display("no Bloom skip"); end
    if (cnt_rerank == 0) begin failures++; $display("no rerank"); end
    if (cnt_stall  == 0) begin failures++; $display("no stall"); end
    if (cnt_sort   == 0) begin failures++; $display("no sort"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
