// htree_bus: one level of the H-tree interconnect (core level inside a
// tile, tile level between the tiles and the search engine).
//
// Downward, a request entering at the root travels through log2(N)
// register stages, one per branching level of the tree, and is delivered to
// the one child named by root_dest. Nothing pushes back on requests: the
// arbiter only addresses idle cores. Upward, children offer responses with
// valid/ready; a round-robin arbiter at the root takes one per cycle and the
// winner travels log2(N) register stages back to the root. up_en low holds
// all children (used by a tile to keep one granule in flight). The H-tree
// topology and its two levels are the paper's; the register per level and
// the round-robin merge are this design's choices.
module htree_bus #(
  parameter int unsigned N     = 16,
  parameter int unsigned REQ_W = 32,
  parameter int unsigned RSP_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      root_req_valid,
  input  logic [$clog2(N)-1:0]      root_dest,
  input  logic [REQ_W-1:0]          root_req,
  output logic [N-1:0]              child_req_valid,
  output logic [REQ_W-1:0]          child_req,
  input  logic                      up_en,       // root can take a response
  input  logic [N-1:0]              child_rsp_valid,
  input  logic [N-1:0][RSP_W-1:0]   child_rsp,
  output logic [N-1:0]              child_rsp_ready,
  output logic                      root_rsp_valid,
  output logic [RSP_W-1:0]          root_rsp
);
  localparam int unsigned LG = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned DW = $clog2(N);

  // downward pipeline
  logic [LG-1:0]            dv;
  logic [LG-1:0][DW-1:0]    dd;
  logic [LG-1:0][REQ_W-1:0] dq;
  // upward pipeline
  logic [LG-1:0]            uv;
  logic [LG-1:0][RSP_W-1:0] uq;
  logic [DW-1:0]            rr_ptr, win;
  logic                     any;

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int i = N - 1; i >= 0; i--) begin
      int unsigned c;
      c = (int'(rr_ptr) + i) % N;
      if (child_rsp_valid[c] && up_en) begin any = 1'b1; win = DW'(c); end
    end
    child_rsp_ready = '0;
    if (any) child_rsp_ready[win] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv <= '0; dd <= '0; uv <= '0; rr_ptr <= '0;
    end else begin
      dv[0] <= root_req_valid;
      dd[0] <= root_dest;
      uv[0] <= any;
      for (int s = 1; s < LG; s++) begin
        dv[s] <= dv[s-1];
        dd[s] <= dd[s-1];
        uv[s] <= uv[s-1];
      end
      if (any) rr_ptr <= win + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    dq[0] <= root_req;
    uq[0] <= child_rsp[win];
    for (int s = 1; s < LG; s++) begin
      dq[s] <= dq[s-1];
      uq[s] <= uq[s-1];
    end
  end

  always_comb begin
    child_req_valid = '0;
    child_req_valid[dd[LG-1]] = dv[LG-1];
  end
  assign child_req      = dq[LG-1];
  assign root_rsp_valid = uv[LG-1];
  assign root_rsp       = uq[LG-1];
endmodule
