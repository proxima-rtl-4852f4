// proxima_top: the whole near-storage ANNS accelerator.
//
// The search engine (CMOS wafer) connects through the tile-level H-tree bus
// to N_TILES tiles of N_CORE 3D NAND cores each (NAND wafer, joined by
// Cu-Cu bonding). Vertices' neighbour lists and PQ codes live in the graph
// cores, raw vectors in the raw cores; the host preloads them through the
// program port, loads the PQ codebook and the layout/search configuration,
// then streams queries in and reads k-NN results out. The I/O interface is
// reduced to these plain ports. Default sizes are the paper's: 256 search
// queues, 16 tiles of 32 cores, a 256-point sorter. The NAND arrays are
// behavioural models whose capacity is scaled far down (PAGES per core).
module proxima_top
  import proxima_pkg::*;
#(
  parameter int unsigned NQ          = 256,
  parameter int unsigned N_TILES     = 16,
  parameter int unsigned N_CORE      = 32,
  parameter int unsigned N_RAW_CORES = 256,
  parameter int unsigned PAGES       = 16,
  parameter int unsigned T_READ      = 300,
  parameter int unsigned T_SEG       = 100,
  parameter int unsigned KMAX        = 16,
  parameter int unsigned NSLOT       = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_t                  cfg,
  input  logic                  cb_we,
  input  logic [4:0]            cb_m,
  input  logic [7:0]            cb_c,
  input  logic [1:0]            cb_j,
  input  fp16_t                 cb_wdata,
  output logic                  qry_ready,
  input  logic                  qv_we,
  input  logic [6:0]            qv_idx,
  input  fp16_t                 qv_data,
  input  logic                  qry_go,
  input  vid_t                  qry_entry,
  output logic [$clog2(NQ)-1:0] qry_qid,
  output logic                  res_valid,
  output logic [$clog2(NQ)-1:0] res_qid,
  output vid_t [KMAX-1:0]       res_ids,
  output fp16_t [KMAX-1:0]      res_dist,
  input  logic                  prog_en,
  input  logic [8:0]            prog_core,
  input  logic [PAGE_W-1:0]     prog_page,
  input  logic [SEG_W-1:0]      prog_seg,
  input  logic [GRAN_BITS-1:0]  prog_data,
  output logic [31:0]           cnt_flush, cnt_et, cnt_hot, cnt_skip,
  output logic [31:0]           cnt_dyn, cnt_rerank, cnt_stall, cnt_sort
);
  localparam int unsigned N_CORES = N_TILES * N_CORE;
  localparam int unsigned TW = (N_TILES <= 1) ? 1 : $clog2(N_TILES);
  localparam int unsigned CW = $clog2(N_CORE);

  logic                 mem_valid;
  logic [TW-1:0]        mem_tile;
  mem_req_t             mem_req;
  logic                 rsp_v;
  mem_rsp_t             rsp;
  logic [N_TILES-1:0]   t_req_v, t_rsp_v, t_rsp_rd;
  mem_req_t             t_req;
  mem_rsp_t [N_TILES-1:0] t_rsp;

  search_engine #(.NQ(NQ), .N_CORES(N_CORES), .N_RAW_CORES(N_RAW_CORES), .N_CORE(N_CORE),
                  .KMAX(KMAX), .NSLOT(NSLOT)) u_se (
    .clk, .rst_n, .cfg, .cb_we, .cb_m, .cb_c, .cb_j, .cb_wdata,
    .qry_ready, .qv_we, .qv_idx, .qv_data, .qry_go, .qry_entry, .qry_qid,
    .res_valid, .res_qid, .res_ids, .res_dist,
    .mem_valid, .mem_tile, .mem_req, .rsp_in_valid(rsp_v), .rsp_in(rsp),
    .cnt_flush, .cnt_et, .cnt_hot, .cnt_skip, .cnt_dyn, .cnt_rerank, .cnt_stall, .cnt_sort);

  htree_bus #(.N(N_TILES), .REQ_W($bits(mem_req_t)), .RSP_W($bits(mem_rsp_t))) u_tile_bus (
    .clk, .rst_n, .root_req_valid(mem_valid), .root_dest(mem_tile), .root_req(mem_req),
    .child_req_valid(t_req_v), .child_req(t_req),
    .up_en(1'b1), .child_rsp_valid(t_rsp_v), .child_rsp(t_rsp), .child_rsp_ready(t_rsp_rd),
    .root_rsp_valid(rsp_v), .root_rsp(rsp));

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile #(.TILE_ID(t), .N_CORE(N_CORE), .PAGES(PAGES), .T_READ(T_READ), .T_SEG(T_SEG)) u_tile (
      .clk, .rst_n, .req_valid(t_req_v[t]), .req(t_req),
      .rsp_valid(t_rsp_v[t]), .rsp(t_rsp[t]), .rsp_ready(t_rsp_rd[t]),
      .prog_en(prog_en && (32'(prog_core) >> CW) == t), .prog_core(prog_core[CW-1:0]),
      .prog_page, .prog_seg, .prog_data);
  end
endmodule
