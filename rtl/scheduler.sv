// scheduler: assigns incoming queries to idle search queues.
//
// An NQ-bit status buffer records which queues are busy. Queries are served
// first come, first served; the queue for the next query is found
// round-robin, searching from the queue after the last one assigned. As
// soon as an idle queue exists it is reserved (target_valid, target) so the
// host can load the query vector into it; the go pulse commits the
// reservation, marks the queue busy and moves the round-robin pointer. A
// queue's done pulse frees it. Round-robin, first-come-first-served and the
// N_q-bit status buffer are the paper's; the reservation step is this
// design's choice.
module scheduler #(
  parameter int unsigned NQ = 256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NQ-1:0]          q_done,
  input  logic                   go,
  output logic                   target_valid,
  output logic [$clog2(NQ)-1:0]  target,
  output logic [NQ-1:0]          status
);
  localparam int unsigned QW = $clog2(NQ);
  logic [QW-1:0] ptr, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int i = NQ - 1; i >= 0; i--) begin
      logic [QW-1:0] c;
      c = ptr + QW'(i);
      if (!status[c]) begin found = 1'b1; pick = c; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status <= '0; ptr <= '0; target_valid <= 1'b0; target <= '0;
    end else begin
      status <= status & ~q_done;
      if (!target_valid) begin
        if (found) begin target_valid <= 1'b1; target <= pick; end
      end else if (go) begin
        status[target] <= 1'b1;
        ptr            <= target + 1'b1;
        target_valid   <= 1'b0;
      end
    end
  end
endmodule
