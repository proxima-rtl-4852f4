// addr_translator: maps a queue's fetch request to a physical NAND location.
//
// Cores 0..N_RAW_CORES-1 hold raw vectors; the remaining cores hold graph
// frames (gap-encoded neighbour ids followed by the vertex's PQ code).
// Vertices are spread round-robin over the cores of each kind, so vertex v
// lives on core v mod N and in slot v / N of that core (core-level
// round-robin mapping). Slots are packed frames-per-page to a page:
//   page = base + (slot >> fpp_lg),  seg = (slot mod 2^fpp_lg) * g,
// where g is the frame size in 128-byte segments. Hot vertices (ids below
// n_hot, the hottest ones after hotness reordering) are fetched from their
// hot frame, which repeats each neighbour's PQ code, stored in the same core
// from page hot_base on. A PQ-code request reads the one or two segments of
// the normal frame that hold the code and reports its bit offset there.
// Purely combinational. Core counts must be powers of two. Round-robin
// placement and the raw/graph core split follow the paper; power-of-two
// frames per page (instead of floor(N_BL/frame bits)) and the 50/50 split of
// cores are this design's choices.
module addr_translator
  import proxima_pkg::*;
#(
  parameter int unsigned N_CORES     = 512,
  parameter int unsigned N_RAW_CORES = 256
) (
  input  cfg_t              cfg,
  input  req_kind_e         kind,
  input  vid_t              vid,
  output logic [8:0]        core,
  output logic [PAGE_W-1:0] page,
  output logic [SEG_W-1:0]  seg,
  output logic [5:0]        nseg,
  output logic              hot,
  output logic [9:0]        pq_bitoff
);
  localparam int unsigned NG  = N_CORES - N_RAW_CORES;
  localparam int unsigned LR  = $clog2(N_RAW_CORES);
  localparam int unsigned LGC = $clog2(NG);

  vid_t        slot;
  logic [2:0]  fpp;
  logic [5:0]  g;
  logic [15:0] pq_off;
  logic [PAGE_W-1:0] base;
  logic [10:0] seg_full;

  always_comb begin
    hot    = 1'b0;
    pq_off = 16'(cfg.w0) + 16'(cfg.r_deg - 7'd1) * 16'(cfg.wgap);
    pq_bitoff = pq_off[9:0];
    if (kind == REQ_RAW) begin
      core = 9'(vid & vid_t'(N_RAW_CORES - 1));
      slot = vid >> LR;
      fpp  = cfg.fpp_raw_lg; g = cfg.g_raw; base = '0;
    end else begin
      core = 9'(N_RAW_CORES) + 9'(vid & vid_t'(NG - 1));
      slot = vid >> LGC;
      hot  = (kind == REQ_NN) && (vid < cfg.n_hot);
      if (hot) begin fpp = cfg.fpp_hot_lg; g = cfg.g_hot; base = cfg.hot_base; end
      else     begin fpp = cfg.fpp_nn_lg;  g = cfg.g_nn;  base = '0; end
    end
    page     = base + PAGE_W'(slot >> fpp);
    seg_full = 11'((slot & vid_t'((32'd1 << fpp) - 32'd1)) * vid_t'(g));
    nseg     = g;
    if (kind == REQ_PQ) begin
      seg_full = seg_full + 11'(pq_off[15:10]);
      nseg     = (11'(pq_bitoff) + 11'(PQ_BITS) > 11'(GRAN_BITS)) ? 6'd2 : 6'd1;
    end
    seg = seg_full[SEG_W-1:0];
  end
endmodule
