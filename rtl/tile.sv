// tile: one 3D NAND tile of N_CORE cores, its I/O buffer and its core-level
// H-tree bus.
//
// A request from the tile-level bus is forwarded over the core H-tree to the
// core named in its low core-id bits. Each core streams its 128-byte
// segments over its own 16-bit I/O link into its slot of the tile's I/O
// buffer; a full slot (one granule with tag, core id and last flag) is
// offered to the core H-tree, which merges the cores round-robin toward the
// tile's response port. The response port uses valid/ready because the
// tile-level bus arbitrates among tiles; a slot that is not drained stalls
// its core's I/O link. The tile keeps one granule in flight between its
// core bus and its output register, which bounds its return rate to one
// granule per few cycles. The program port writes one segment of one core for
// graph preloading. Per-core 16-bit links and the bus hierarchy follow the
// paper; placing the granule assembly ahead of the core bus is this
// design's choice.
module tile
  import proxima_pkg::*;
#(
  parameter int unsigned TILE_ID = 0,
  parameter int unsigned N_CORE  = 32,
  parameter int unsigned PAGES   = 16,
  parameter int unsigned T_READ  = 300,
  parameter int unsigned T_SEG   = 100
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       req_valid,
  input  mem_req_t                   req,
  output logic                       rsp_valid,
  output mem_rsp_t                   rsp,
  input  logic                       rsp_ready,
  input  logic                       prog_en,
  input  logic [$clog2(N_CORE)-1:0]  prog_core,
  input  logic [PAGE_W-1:0]          prog_page,
  input  logic [SEG_W-1:0]           prog_seg,
  input  logic [GRAN_BITS-1:0]       prog_data
);
  localparam int unsigned CW = $clog2(N_CORE);

  logic [N_CORE-1:0]            creq_v;
  mem_req_t                     creq;
  logic [N_CORE-1:0]            slot_full, slot_rd;
  mem_rsp_t [N_CORE-1:0]        slot;
  logic                         root_v;
  mem_rsp_t                     root_q;

  logic out_full;
  // one granule in flight between the core bus and the tile output
  logic inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= 1'b0;
    else if (|slot_rd) inflight <= 1'b1;
    else if (out_full && rsp_ready) inflight <= 1'b0;
  end
  wire bus_hold = inflight;

  htree_bus #(.N(N_CORE), .REQ_W($bits(mem_req_t)), .RSP_W($bits(mem_rsp_t))) u_bus (
    .clk, .rst_n,
    .root_req_valid(req_valid), .root_dest(req.core[CW-1:0]), .root_req(req),
    .child_req_valid(creq_v), .child_req(creq),
    .up_en(!bus_hold), .child_rsp_valid(slot_full), .child_rsp(slot), .child_rsp_ready(slot_rd),
    .root_rsp_valid(root_v), .root_rsp(root_q));

  // tile output register (holds a granule until the tile bus takes it)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_full <= 1'b0;
    else if (root_v) out_full <= 1'b1;
    else if (rsp_ready) out_full <= 1'b0;
  end
  always_ff @(posedge clk) if (root_v) rsp <= root_q;
  assign rsp_valid = out_full;


  for (genvar c = 0; c < N_CORE; c++) begin : g_core
    logic        io_valid, io_seg_last, io_last, io_ready;
    logic [15:0] io_data;
    logic [TAG_W-1:0] io_tag;
    logic [5:0]  beat;

    nand_core #(.PAGES(PAGES), .T_READ(T_READ), .T_SEG(T_SEG)) u_core (
      .clk, .rst_n, .req_valid(creq_v[c]), .req(creq), .busy(),
      .io_valid, .io_data, .io_tag, .io_seg_last, .io_last, .io_ready,
      .prog_en(prog_en && (prog_core == CW'(c))), .prog_page, .prog_seg, .prog_data);

    assign io_ready = !slot_full[c];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        slot_full[c] <= 1'b0; beat <= '0;
      end else begin
        if (slot_rd[c]) slot_full[c] <= 1'b0;
        if (io_valid && io_ready) begin
          beat <= beat + 6'd1;
          if (io_seg_last) begin slot_full[c] <= 1'b1; beat <= '0; end
        end
      end
    end
    always_ff @(posedge clk) begin
      if (io_valid && io_ready) begin
        slot[c].data[16*beat +: 16] <= io_data;
        slot[c].tag  <= io_tag;
        slot[c].last <= io_last;
        slot[c].core <= 9'(TILE_ID * N_CORE + c);
      end
    end
  end
endmodule
