// candidate_list: the candidate set L of one search queue (2 kB).
//
// Each of the NSLOT 64-bit entries holds a vertex id (30 b), its PQ
// distance (FP16), its accurate distance once reranked (FP16) and two flags:
// evaluated (its neighbourhood has been expanded) and reranked. After a sort
// the first n entries are in ascending PQ-distance order; new neighbours are
// appended at slot n. The list also keeps the previous iteration's k-NN ids
// for the early-termination test.
//
// Commands (one per cycle, applied at the clock edge):
//   clr            empty the list and the previous k-NN
//   app            append (app_vid, app_pq) at slot n
//   mark_ev        set the evaluated flag of entry idx
//   set_ex         store accurate distance ex_val in entry idx, set reranked
//   perm_we        reorder: entry i <- entry perm[i] for i < n, then
//                  n <- min(n, keep)   (sort result, list trimmed to L)
//   prev_we        store prev_wdata as the previous k-NN ids
// Combinational outputs: the sort keys of all slots (PQ keys, or accurate
// keys with unreranked slots pushed to the end when key_exact is set), the
// first unevaluated entry, whether the top t entries are all evaluated, and
// a read port. Entry layout and command set are this design's choices; the
// paper gives the 2 kB size and what the list holds.
module candidate_list
  import proxima_pkg::*;
#(
  parameter int unsigned NSLOT = 256,
  parameter int unsigned KMAX  = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clr,
  input  logic                               app,
  input  vid_t                               app_vid,
  input  fp16_t                              app_pq,
  input  logic                               mark_ev,
  input  logic                               set_ex,
  input  logic [$clog2(NSLOT)-1:0]           idx,
  input  fp16_t                              ex_val,
  input  logic                               perm_we,
  input  logic [NSLOT-1:0][$clog2(NSLOT)-1:0] perm,
  input  logic [$clog2(NSLOT):0]             keep,
  input  logic                               prev_we,
  input  vid_t [KMAX-1:0]                    prev_wdata,
  input  logic                               key_exact,
  input  logic [$clog2(NSLOT):0]             top_t,
  output logic [NSLOT-1:0][15:0]             keys,
  output logic [$clog2(NSLOT):0]             n,
  output logic                               full,
  output logic                               unev_found,
  output logic [$clog2(NSLOT)-1:0]           unev_idx,
  output logic                               top_all_ev,
  output vid_t                               rd_vid,
  output fp16_t                              rd_pq,
  output fp16_t                              rd_ex,
  output logic                               rd_rr,
  output vid_t [KMAX-1:0]                    prev_ids
);
  localparam int unsigned IW = $clog2(NSLOT);

  typedef struct packed {
    vid_t  vid;
    fp16_t pq;
    fp16_t ex;
    logic  ev;
    logic  rr;
  } cand_t;

  cand_t [NSLOT-1:0] ent;

  assign full = (n == (IW+1)'(NSLOT));

  always_comb begin
    unev_found = 1'b0;
    unev_idx   = '0;
    top_all_ev = 1'b1;
    for (int i = NSLOT - 1; i >= 0; i--) begin
      if (i < int'(n) && !ent[i].ev) begin
        unev_found = 1'b1;
        unev_idx   = IW'(i);
      end
      if (i < int'(n) && i < int'(top_t) && !ent[i].ev) top_all_ev = 1'b0;
    end
    for (int i = 0; i < NSLOT; i++) begin
      if (i >= int'(n))   keys[i] = KEY_EMPTY;
      else if (!key_exact) keys[i] = fp16_key(ent[i].pq);
      else                 keys[i] = ent[i].rr ? fp16_key(ent[i].ex) : KEY_EMPTY;
    end
  end

  assign rd_vid = ent[idx].vid;
  assign rd_pq  = ent[idx].pq;
  assign rd_ex  = ent[idx].ex;
  assign rd_rr  = ent[idx].rr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n <= '0;
      prev_ids <= '0;
    end else if (clr) begin
      n <= '0;
      prev_ids <= '1;
    end else begin
      if (app && !full) begin
        ent[n[IW-1:0]] <= '{vid: app_vid, pq: app_pq, ex: 16'd0, ev: 1'b0, rr: 1'b0};
        n <= n + 1'b1;
      end
      if (mark_ev) ent[idx].ev <= 1'b1;
      if (set_ex) begin
        ent[idx].ex <= ex_val;
        ent[idx].rr <= 1'b1;
      end
      if (perm_we) begin
        for (int i = 0; i < NSLOT; i++) ent[i] <= ent[perm[i]];
        if (keep < n) n <= keep;
      end
      if (prev_we) prev_ids <= prev_wdata;
    end
  end
endmodule
