// arbiter: hands the search queues' fetch requests to the 3D NAND cores.
//
// Each cycle the arbiter takes the next requesting queue in round-robin
// order, translates its (kind, vertex) into a core, page and segment range
// (addr_translator) and checks the core's busy bit. If the core is idle the
// request goes out on the tile H-tree bus, the core is marked busy and the
// queue gets a grant together with the frame format (hot) and the PQ code's
// bit offset. If the core is busy the request is stalled for this round and
// the pointer moves on, so one blocked queue does not hold up the others.
// Returned granules carry the queue tag and are broadcast to the queues;
// the last granule of a request frees its core. Round-robin allocation,
// address translation and stalling on a busy core are the paper's; the
// one-request-per-cycle rate is this design's choice.
module arbiter
  import proxima_pkg::*;
#(
  parameter int unsigned NQ          = 256,
  parameter int unsigned N_CORES     = 512,
  parameter int unsigned N_RAW_CORES = 256,
  parameter int unsigned N_CORE      = 32     // cores per tile
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_t                   cfg,
  input  logic [NQ-1:0]          q_req_valid,
  input  q_req_t [NQ-1:0]        q_req,
  output logic [NQ-1:0]          q_gnt,
  output logic                   gnt_hot,
  output logic [9:0]             gnt_bitoff,
  output logic                   mem_valid,
  output logic [$clog2(N_CORES/N_CORE)-1:0] mem_tile,
  output mem_req_t               mem_req,
  input  logic                   rsp_in_valid,
  input  mem_rsp_t               rsp_in,
  output logic                   rsp_valid,
  output mem_rsp_t               rsp,
  output logic                   stall
);
  localparam int unsigned QW = $clog2(NQ);
  localparam int unsigned CW = $clog2(N_CORE);

  logic [QW-1:0] ptr, cand;
  logic          any;
  logic [N_CORES-1:0] core_busy;
  logic [8:0]    core;
  logic [PAGE_W-1:0] page;
  logic [SEG_W-1:0]  seg;
  logic [5:0]    nseg;
  logic          hot;
  logic [9:0]    bitoff;

  always_comb begin
    any  = 1'b0;
    cand = '0;
    for (int i = NQ - 1; i >= 0; i--) begin
      logic [QW-1:0] c;
      c = ptr + QW'(i);
      if (q_req_valid[c]) begin any = 1'b1; cand = c; end
    end
  end

  addr_translator #(.N_CORES(N_CORES), .N_RAW_CORES(N_RAW_CORES)) u_xlat (
    .cfg, .kind(q_req[cand].kind), .vid(q_req[cand].vid),
    .core, .page, .seg, .nseg, .hot, .pq_bitoff(bitoff));

  wire send = any && !core_busy[core[$clog2(N_CORES)-1:0]];

  always_comb begin
    q_gnt = '0;
    if (send) q_gnt[cand] = 1'b1;
  end
  assign gnt_hot    = hot;
  assign gnt_bitoff = bitoff;
  assign stall      = any && !send;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; core_busy <= '0; mem_valid <= 1'b0; mem_tile <= '0; mem_req <= '0;
      rsp_valid <= 1'b0;
    end else begin
      mem_valid <= send;
      rsp_valid <= rsp_in_valid;
      if (any) ptr <= cand + 1'b1;
      if (send) begin
        core_busy[core[$clog2(N_CORES)-1:0]] <= 1'b1;
        mem_tile <= core[$clog2(N_CORES)-1:CW];
        mem_req  <= '{tag: TAG_W'(cand), core: core, page: page, seg: seg, nseg: nseg};
      end
      if (rsp_in_valid && rsp_in.last) core_busy[rsp_in.core[$clog2(N_CORES)-1:0]] <= 1'b0;
    end
  end
  always_ff @(posedge clk) if (rsp_in_valid) rsp <= rsp_in;
endmodule
