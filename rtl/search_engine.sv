// search_engine: the CMOS-tier logic that runs graph searches.
//
// It contains the PQ module (codebook memory and 32 FP16 MACs), the
// scheduler, NQ search queues, the arbiter toward the 3D NAND tiles and the
// single bitonic sorter that all queues share. The flow for one query:
//   1. qry_ready says a queue is reserved and the PQ module is free. The host
//      writes the D query elements (qv_we); each goes both to the PQ module
//      and to the reserved queue's query buffer. qry_go with the entry
//      vertex commits the query: the PQ module computes the ADT and streams
//      it, row by row, into that queue's ADT memory, after which the queue
//      starts its search.
//   2. Queues fetch graph data through the arbiter and sort through the
//      shared sorter, which takes one queue's list per cycle (round-robin).
//   3. A finished queue's k-NN list is reported on res_valid (one per cycle,
//      lowest queue first when several finish together) and the queue is
//      free again.
// Statistics counters count each mechanism's events over all queues. The
// block structure is the paper's; the host-side load protocol and counters
// are this design's choices.
module search_engine
  import proxima_pkg::*;
#(
  parameter int unsigned NQ          = 256,
  parameter int unsigned N_CORES     = 512,
  parameter int unsigned N_RAW_CORES = 256,
  parameter int unsigned N_CORE      = 32,
  parameter int unsigned KMAX        = 16,
  parameter int unsigned NSLOT       = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  // codebook
  input  logic                    cb_we,
  input  logic [4:0]              cb_m,
  input  logic [7:0]              cb_c,
  input  logic [1:0]              cb_j,
  input  fp16_t                   cb_wdata,
  // query in
  output logic                    qry_ready,
  input  logic                    qv_we,
  input  logic [6:0]              qv_idx,
  input  fp16_t                   qv_data,
  input  logic                    qry_go,
  input  vid_t                    qry_entry,
  output logic [$clog2(NQ)-1:0]   qry_qid,
  // k-NN out
  output logic                    res_valid,
  output logic [$clog2(NQ)-1:0]   res_qid,
  output vid_t [KMAX-1:0]         res_ids,
  output fp16_t [KMAX-1:0]        res_dist,
  // tile bus
  output logic                    mem_valid,
  output logic [$clog2(N_CORES/N_CORE)-1:0] mem_tile,
  output mem_req_t                mem_req,
  input  logic                    rsp_in_valid,
  input  mem_rsp_t                rsp_in,
  // statistics
  output logic [31:0]             cnt_flush, cnt_et, cnt_hot, cnt_skip,
  output logic [31:0]             cnt_dyn, cnt_rerank, cnt_stall, cnt_sort
);
  localparam int unsigned QW = $clog2(NQ);
  localparam int unsigned IW = $clog2(NSLOT);

  // ---------------- PQ module ----------------
  logic pq_busy, adt_valid, pq_done;
  logic [7:0] adt_c;
  fp16_t [PQ_M-1:0] adt_row;

  pq_module #(.C(PQ_C), .M(PQ_M), .DSUB_MAX(4)) u_pq (
    .clk, .rst_n, .cb_we, .cb_m, .cb_c, .cb_j, .cb_wdata,
    .q_we(qv_we), .q_idx(qv_idx), .q_wdata(qv_data),
    .start(qry_go && qry_ready), .metric(cfg.metric), .dsub(cfg.dsub),
    .busy(pq_busy), .adt_valid, .adt_c, .adt_row, .done(pq_done));

  // ---------------- scheduler ----------------
  logic [NQ-1:0] q_done, q_start, status;
  logic          tgt_valid, loading;
  logic [QW-1:0] tgt, run_q;
  vid_t          entry_q;

  scheduler #(.NQ(NQ)) u_sched (
    .clk, .rst_n, .q_done, .go(qry_go && qry_ready),
    .target_valid(tgt_valid), .target(tgt), .status);

  assign qry_ready = tgt_valid && !pq_busy && !loading;
  assign qry_qid   = tgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading <= 1'b0; run_q <= '0; entry_q <= '0;
    end else begin
      if (qry_go && qry_ready) begin loading <= 1'b1; run_q <= tgt; entry_q <= qry_entry; end
      else if (pq_done) loading <= 1'b0;
    end
  end
  always_comb begin
    q_start = '0;
    if (pq_done) q_start[run_q] = 1'b1;
  end

  // ---------------- queues ----------------
  logic [NQ-1:0]      q_req_valid, q_gnt, sort_req, sort_gnt;
  q_req_t [NQ-1:0]    q_req;
  logic               gnt_hot;
  logic [9:0]         gnt_bitoff;
  logic               rsp_valid;
  mem_rsp_t           rsp;
  logic [NQ-1:0][NSLOT-1:0][15:0] sort_keys;
  logic               s_out_valid;
  logic [TAG_W-1:0]   s_out_tag;
  logic [NSLOT-1:0][15:0]    s_out_keys;
  logic [NSLOT-1:0][IW-1:0]  s_out_perm;
  vid_t  [NQ-1:0][KMAX-1:0]  q_ids;
  fp16_t [NQ-1:0][KMAX-1:0]  q_dist;
  logic [NQ-1:0] e_flush, e_et, e_hot, e_skip, e_dyn, e_rr;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    search_queue #(.QID(q), .NSLOT(NSLOT), .KMAX(KMAX)) u_queue (
      .clk, .rst_n, .cfg,
      .adt_we(adt_valid && run_q == QW'(q)), .adt_c, .adt_row,
      .qv_we(qv_we && tgt == QW'(q)), .qv_idx, .qv_data,
      .start(q_start[q]), .entry(entry_q), .busy(),
      .req_valid(q_req_valid[q]), .req(q_req[q]), .gnt(q_gnt[q]),
      .gnt_hot, .gnt_bitoff, .rsp_valid, .rsp,
      .sort_req(sort_req[q]), .sort_keys(sort_keys[q]), .sort_gnt(sort_gnt[q]),
      .sort_res_valid(s_out_valid), .sort_res_tag(s_out_tag), .sort_res_perm(s_out_perm),
      .done(q_done[q]), .res_ids(q_ids[q]), .res_dist(q_dist[q]),
      .ev_flush(e_flush[q]), .ev_et(e_et[q]), .ev_hot(e_hot[q]), .ev_skip(e_skip[q]),
      .ev_dyn(e_dyn[q]), .ev_rerank(e_rr[q]));
  end

  // ---------------- arbiter ----------------
  logic stall;
  arbiter #(.NQ(NQ), .N_CORES(N_CORES), .N_RAW_CORES(N_RAW_CORES), .N_CORE(N_CORE)) u_arb (
    .clk, .rst_n, .cfg, .q_req_valid, .q_req, .q_gnt, .gnt_hot, .gnt_bitoff,
    .mem_valid, .mem_tile, .mem_req, .rsp_in_valid, .rsp_in, .rsp_valid, .rsp, .stall);

  // ---------------- shared sorter ----------------
  logic [QW-1:0] s_ptr, s_pick;
  logic          s_any;
  always_comb begin
    s_any = 1'b0; s_pick = '0;
    for (int i = NQ - 1; i >= 0; i--) begin
      logic [QW-1:0] c;
      c = s_ptr + QW'(i);
      if (sort_req[c]) begin s_any = 1'b1; s_pick = c; end
    end
    sort_gnt = '0;
    if (s_any) sort_gnt[s_pick] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_ptr <= '0;
    else if (s_any) s_ptr <= s_pick + 1'b1;
  end

  bitonic_sorter #(.N(NSLOT), .KW(16), .TW(TAG_W)) u_sorter (
    .clk, .rst_n, .in_valid(s_any), .in_tag(TAG_W'(s_pick)), .in_keys(sort_keys[s_pick]),
    .out_valid(s_out_valid), .out_tag(s_out_tag), .out_keys(s_out_keys), .out_perm(s_out_perm));

  // ---------------- results ----------------
  logic [NQ-1:0] pend;
  logic [QW-1:0] r_pick;
  logic          r_any;
  always_comb begin
    r_any = 1'b0; r_pick = '0;
    for (int i = NQ - 1; i >= 0; i--)
      if (pend[i]) begin r_any = 1'b1; r_pick = QW'(i); end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; res_valid <= 1'b0; res_qid <= '0; res_ids <= '0; res_dist <= '0;
    end else begin
      res_valid <= r_any;
      if (r_any) begin
        res_qid <= r_pick; res_ids <= q_ids[r_pick]; res_dist <= q_dist[r_pick];
      end
      pend <= (pend & ~(r_any ? (NQ'(1) << r_pick) : '0)) | q_done;
    end
  end

  // ---------------- statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_flush <= '0; cnt_et <= '0; cnt_hot <= '0; cnt_skip <= '0;
      cnt_dyn <= '0; cnt_rerank <= '0; cnt_stall <= '0; cnt_sort <= '0;
    end else begin
      cnt_flush  <= cnt_flush  + 32'($countones(e_flush));
      cnt_et     <= cnt_et     + 32'($countones(e_et));
      cnt_hot    <= cnt_hot    + 32'($countones(e_hot));
      cnt_skip   <= cnt_skip   + 32'($countones(e_skip));
      cnt_dyn    <= cnt_dyn    + 32'($countones(e_dyn));
      cnt_rerank <= cnt_rerank + 32'($countones(e_rr));
      cnt_stall  <= cnt_stall  + 32'(stall);
      cnt_sort   <= cnt_sort   + 32'(s_any);
    end
  end
endmodule
