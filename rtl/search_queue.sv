// search_queue: one search queue, which runs the whole graph search of one
// query.
//
// The queue owns a distance unit (ADT memory, query buffer, MAC), a Bloom
// filter of visited vertices, a candidate list and a frame buffer with the
// gap decoder. After the PQ module has filled its ADT and the host has
// written the query vector, a start pulse with the entry vertex runs:
//   1. entry: fetch the entry vertex's PQ code, compute its PQ distance and
//      insert it into the empty candidate list.
//   2. expand: take the first unevaluated candidate, mark it evaluated and
//      fetch its neighbour list (a hot frame also carries the neighbours' PQ
//      codes). Each neighbour passes the Bloom filter; an unseen one gets its
//      PQ code (fetched, or inline from a hot frame), its PQ distance, and is
//      appended. If the 256 slots fill up, the list is sorted and cut to L
//      first (overflow flush).
//   3. sort: the shared bitonic sorter orders the list; it is cut to L.
//   4. check: if the first T candidates are all evaluated, those not yet
//      reranked get an accurate distance from their raw vectors, the list is
//      sorted by accurate distance and its top-k compared with the previous
//      top-k. Equal for r consecutive checks ends the search (early
//      termination); otherwise T grows by T_step (dynamic list) and the
//      search goes on while T <= L.
//   5. final rerank: every candidate whose PQ distance is below
//      beta * PQdist(L[T]) is reranked; the top-k by accurate distance are
//      returned with done.
// Memory traffic: one outstanding request at a time (req_valid until gnt);
// granules come back tagged with QID and are written to the frame buffer.
// Neighbour lists use granules from 0, PQ codes the last two, raw vectors
// the two before. Sorts go through sort_req/sort_gnt and the result is
// picked by tag. The algorithm is the paper's (Algorithm 1 and its data
// flow steps); the state machine, the single outstanding request and the
// buffer regions are this design's choices. T starts at cfg.t_init, a
// value the paper does not give.
module search_queue
  import proxima_pkg::*;
#(
  parameter int unsigned QID   = 0,
  parameter int unsigned NSLOT = 256,
  parameter int unsigned KMAX  = 16,
  parameter int unsigned FMAX  = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  cfg_t                               cfg,
  // initialisation from the PQ module / host
  input  logic                               adt_we,
  input  logic [7:0]                         adt_c,
  input  fp16_t [PQ_M-1:0]                   adt_row,
  input  logic                               qv_we,
  input  logic [6:0]                         qv_idx,
  input  fp16_t                              qv_data,
  input  logic                               start,
  input  vid_t                               entry,
  output logic                               busy,
  // memory requests
  output logic                               req_valid,
  output q_req_t                             req,
  input  logic                               gnt,
  input  logic                               gnt_hot,
  input  logic [9:0]                         gnt_bitoff,
  input  logic                               rsp_valid,
  input  mem_rsp_t                           rsp,
  // shared sorter
  output logic                               sort_req,
  output logic [NSLOT-1:0][15:0]             sort_keys,
  input  logic                               sort_gnt,
  input  logic                               sort_res_valid,
  input  logic [TAG_W-1:0]                   sort_res_tag,
  input  logic [NSLOT-1:0][$clog2(NSLOT)-1:0] sort_res_perm,
  // result
  output logic                               done,
  output vid_t [KMAX-1:0]                    res_ids,
  output fp16_t [KMAX-1:0]                   res_dist,
  // event pulses (for statistics)
  output logic                               ev_flush,
  output logic                               ev_et,
  output logic                               ev_hot,
  output logic                               ev_skip,
  output logic                               ev_dyn,
  output logic                               ev_rerank
);
  localparam int unsigned IW = $clog2(NSLOT);
  localparam int unsigned GW = $clog2(FMAX);

  typedef enum logic [4:0] {
    S_IDLE, S_REQ, S_RSP, S_SORT, S_SORTW,
    S_NB_BLOOM, S_NB_BW, S_PQX, S_PQS, S_DISTW, S_APP,
    S_SEL, S_PSTART, S_PARSE, S_CHECK,
    S_RR, S_RRS, S_RRW, S_ETC, S_ETD, S_FIN_THR, S_FINC, S_DONE
  } st_e;

  st_e st, ret, sret;

  // ---- request / fetch registers ----
  req_kind_e     fkind;
  vid_t          fvid;
  logic [GW-1:0] fbase, gcnt;
  logic          hot_q;
  logic [9:0]    bitoff_q;

  // ---- search registers ----
  logic [8:0]    t_q;
  logic [3:0]    same_cnt;
  vid_t          nv;
  logic          from_dec, pend_pq;
  logic [PQ_BITS-1:0] pq_q;
  fp16_t         d_q, thr_q;
  logic [8:0]    p_q;
  logic          rr_final, sort_exact;
  logic [KMAX-1:0][IW-1:0] perm_top;
  vid_t [KMAX-1:0] cur_ids;
  logic [4:0]    ki;

  wire rsp_mine  = rsp_valid && (rsp.tag == TAG_W'(QID));
  wire sort_mine = sort_res_valid && (sort_res_tag == TAG_W'(QID));

  // ---- sub-units ----
  logic          dec_start, dec_out_valid, dec_is_pq, dec_ready, dec_done;
  vid_t          dec_vid;
  logic [PQ_BITS-1:0] dec_pq, ext_pq;
  logic [2*GRAN_BITS-1:0] raw_pair;

  gap_decoder #(.FMAX(FMAX)) u_dec (
    .clk, .rst_n,
    .gran_we(st == S_RSP && rsp_mine), .gran_addr(fbase + gcnt), .gran_data(rsp.data),
    .start(dec_start), .hot(hot_q), .r_deg(cfg.r_deg), .w0(cfg.w0), .wgap(cfg.wgap),
    .out_valid(dec_out_valid), .out_is_pq(dec_is_pq), .out_vid(dec_vid), .out_pq(dec_pq),
    .out_ready(dec_ready), .done(dec_done),
    .ext_pos({GW'(FMAX - 2), bitoff_q}), .ext_pq, .raw_pair);

  logic  bl_clear, bl_req, bl_ready, bl_resp, bl_visited;
  bloom_filter u_bloom (
    .clk, .rst_n, .clear(bl_clear), .req_valid(bl_req), .req_vid(nv),
    .req_ready(bl_ready), .resp_valid(bl_resp), .visited(bl_visited));

  logic  du_start_pq, du_start_acc, du_busy, du_valid;
  fp16_t du_dist;
  dist_unit u_dist (
    .clk, .rst_n, .adt_we, .adt_c, .adt_row,
    .q_we(qv_we), .q_idx(qv_idx), .q_wdata(qv_data),
    .metric(cfg.metric), .dim(cfg.dim),
    .start_pq(du_start_pq), .pq_code(pq_q),
    .start_acc(du_start_acc), .raw(raw_pair),
    .busy(du_busy), .dist_valid(du_valid), .dist_o(du_dist));

  logic          cl_clr, cl_app, cl_mark, cl_setex, cl_perm, cl_prev;
  logic [IW-1:0] cl_idx, cl_unev_idx;
  logic [IW:0]   cl_n;
  logic          cl_full, cl_unev, cl_topev, cl_rr;
  vid_t          cl_vid;
  fp16_t         cl_pq, cl_ex;
  vid_t [KMAX-1:0] prev_ids;

  candidate_list #(.NSLOT(NSLOT), .KMAX(KMAX)) u_cl (
    .clk, .rst_n, .clr(cl_clr), .app(cl_app), .app_vid(nv), .app_pq(d_q),
    .mark_ev(cl_mark), .set_ex(cl_setex), .idx(cl_idx), .ex_val(du_dist),
    .perm_we(cl_perm), .perm(sort_res_perm), .keep((IW+1)'(cfg.l_size)),
    .prev_we(cl_prev), .prev_wdata(cur_ids),
    .key_exact(sort_exact), .top_t((IW+1)'(t_q)),
    .keys(sort_keys), .n(cl_n), .full(cl_full),
    .unev_found(cl_unev), .unev_idx(cl_unev_idx), .top_all_ev(cl_topev),
    .rd_vid(cl_vid), .rd_pq(cl_pq), .rd_ex(cl_ex), .rd_rr(cl_rr), .prev_ids);

  // ---- derived values ----
  logic [8:0] lim_t;
  logic       rr_in_range, same_knn;
  logic [IW-1:0] last_t_idx;
  always_comb begin
    lim_t = (9'(cl_n) < t_q) ? 9'(cl_n) : t_q;
    if (!rr_final) rr_in_range = (p_q < lim_t);
    else rr_in_range = (p_q < 9'(cl_n)) && (fp16_key(cl_pq) < fp16_key(thr_q));
    same_knn = 1'b1;
    for (int i = 0; i < KMAX; i++)
      if (i < int'(cfg.k) && cur_ids[i] != prev_ids[i]) same_knn = 1'b0;
    last_t_idx = (lim_t == 0) ? '0 : IW'(lim_t - 9'd1);
  end

  always_comb begin
    cl_idx = '0;
    unique case (st)
      S_SEL:            cl_idx = cl_unev_idx;
      S_RR, S_RRS, S_RRW: cl_idx = IW'(p_q);
      S_ETC, S_FINC:    cl_idx = perm_top[ki[$clog2(KMAX)-1:0]];
      S_FIN_THR:        cl_idx = last_t_idx;
      default:          cl_idx = '0;
    endcase
  end

  // ---- control outputs ----
  assign busy      = (st != S_IDLE);
  assign req_valid = (st == S_REQ);
  assign req       = '{kind: fkind, vid: fvid};
  assign sort_req  = (st == S_SORT);
  assign bl_req    = (st == S_NB_BLOOM) && bl_ready;
  assign dec_start = (st == S_PSTART);
  assign du_start_pq  = (st == S_PQS);
  assign du_start_acc = (st == S_RRS);
  assign cl_clr    = (st == S_IDLE) && start;
  assign bl_clear  = (st == S_IDLE) && start;
  assign cl_app    = (st == S_APP) && !cl_full;
  assign cl_mark   = (st == S_SEL) && cl_unev;
  assign cl_setex  = (st == S_RRW) && du_valid;
  assign cl_perm   = (st == S_SORTW) && sort_mine && !sort_exact;
  assign cl_prev   = (st == S_ETD);
  assign dec_ready = ((st == S_NB_BW) && bl_resp && from_dec) ||
                     ((st == S_PARSE) && dec_out_valid && dec_is_pq);

  assign ev_flush  = (st == S_APP) && cl_full;
  assign ev_hot    = (st == S_REQ) && gnt && gnt_hot;
  assign ev_skip   = (st == S_NB_BW) && bl_resp && bl_visited;
  assign ev_rerank = cl_setex;
  assign ev_et     = (st == S_ETD) && same_knn && (same_cnt + 4'd1 >= cfg.rep);
  assign ev_dyn    = (st == S_ETD) && !ev_et && (t_q + cfg.t_step <= cfg.l_size);


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; sret <= S_IDLE;
      fkind <= REQ_NN; fvid <= '0; fbase <= '0; gcnt <= '0; hot_q <= 1'b0; bitoff_q <= '0;
      t_q <= '0; same_cnt <= '0; nv <= '0; from_dec <= 1'b0; pend_pq <= 1'b0;
      pq_q <= '0; d_q <= '0; thr_q <= '0; p_q <= '0; rr_final <= 1'b0; sort_exact <= 1'b0;
      perm_top <= '0; cur_ids <= '0; ki <= '0; done <= 1'b0; res_ids <= '0; res_dist <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          t_q <= cfg.t_init; same_cnt <= '0; nv <= entry; from_dec <= 1'b0;
          hot_q <= 1'b0; pend_pq <= 1'b0;
          st <= S_NB_BLOOM;
        end
        // ---- generic fetch ----
        S_REQ: if (gnt) begin
          if (fkind == REQ_NN) hot_q <= gnt_hot;
          bitoff_q <= gnt_bitoff;
          st <= S_RSP;
        end
        S_RSP: if (rsp_mine) begin
          gcnt <= gcnt + 1'b1;
          if (rsp.last) st <= ret;
        end
        // ---- generic sort ----
        S_SORT: if (sort_gnt) st <= S_SORTW;
        S_SORTW: if (sort_mine) begin
          for (int i = 0; i < KMAX; i++) perm_top[i] <= sort_res_perm[i];
          ki <= '0;
          st <= sret;
        end
        // ---- one neighbour (or the entry vertex) ----
        S_NB_BLOOM: if (bl_ready) st <= S_NB_BW;
        S_NB_BW: if (bl_resp) begin
          if (bl_visited) begin
            st <= from_dec ? S_PARSE : S_SEL;
          end else if (from_dec && hot_q) begin
            pend_pq <= 1'b1;
            st <= S_PARSE;
          end else
            begin fkind <= REQ_PQ; fvid <= nv; fbase <= GW'(FMAX - 2); ret <= S_PQX; gcnt <= '0; st <= S_REQ; end
        end
        S_PQX: begin pq_q <= ext_pq; st <= S_PQS; end
        S_PQS: st <= S_DISTW;
        S_DISTW: if (du_valid) begin d_q <= du_dist; st <= S_APP; end
        S_APP: begin
          if (cl_full) begin sort_exact <= 1'b0; sret <= S_APP; st <= S_SORT; end
          else st <= from_dec ? S_PARSE : S_SEL;
        end
        // ---- expand the first unevaluated candidate ----
        S_SEL: begin
          if (cl_unev) begin fkind <= REQ_NN; fvid <= cl_vid; fbase <= '0; ret <= S_PSTART; gcnt <= '0; st <= S_REQ; end
          else st <= S_CHECK;
        end
        S_PSTART: st <= S_PARSE;
        S_PARSE: begin
          if (dec_out_valid) begin
            if (dec_is_pq) begin   // PQ code of a visited neighbour is skipped
              if (pend_pq) begin
                pend_pq <= 1'b0; pq_q <= dec_pq; st <= S_PQS;
              end
            end else begin
              nv <= dec_vid; from_dec <= 1'b1; st <= S_NB_BLOOM;
            end
          end else begin sort_exact <= 1'b0; sret <= S_CHECK; st <= S_SORT; end
        end
        S_CHECK: begin
          if (cl_topev) begin p_q <= '0; rr_final <= 1'b0; st <= S_RR; end
          else st <= S_SEL;
        end
        // ---- rerank loop ----
        S_RR: begin
          if (rr_in_range) begin
            if (cl_rr) p_q <= p_q + 9'd1;
            else begin fkind <= REQ_RAW; fvid <= cl_vid; fbase <= GW'(FMAX - 4); ret <= S_RRS; gcnt <= '0; st <= S_REQ; end
          end else begin sort_exact <= 1'b1; sret <= rr_final ? S_FINC : S_ETC; st <= S_SORT; end
        end
        S_RRS: st <= S_RRW;
        S_RRW: if (du_valid) begin p_q <= p_q + 9'd1; st <= S_RR; end
        // ---- early termination ----
        S_ETC: begin
          cur_ids[ki[$clog2(KMAX)-1:0]] <= cl_vid;
          ki <= ki + 5'd1;
          if (ki + 5'd1 >= cfg.k) st <= S_ETD;
        end
        S_ETD: begin
          if (same_knn) same_cnt <= same_cnt + 4'd1;
          else          same_cnt <= '0;
          if (ev_et || (t_q + cfg.t_step > cfg.l_size)) st <= S_FIN_THR;
          else begin
            t_q <= t_q + cfg.t_step;
            st  <= S_SEL;
          end
        end
        // ---- final beta rerank ----
        S_FIN_THR: begin
          thr_q <= fp16_mul(cl_pq, cfg.beta);
          p_q <= '0; rr_final <= 1'b1; st <= S_RR;
        end
        S_FINC: begin
          res_ids[ki[$clog2(KMAX)-1:0]]  <= cl_vid;
          res_dist[ki[$clog2(KMAX)-1:0]] <= cl_ex;
          ki <= ki + 5'd1;
          if (ki + 5'd1 >= cfg.k) st <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
