// tb_htree_bus: one level of the H-tree interconnect (16 children).
//
// Downward: a random request (destination, payload) enters at the root on
// most cycles; each must appear at exactly its destination child
// log2(16) = 4 cycles later, one register stage per tree level, with its
// payload. Upward: every child offers a stream of numbered responses and
// holds each until child_rsp_ready; up_en is random. Every response must
// reach the root exactly 4 cycles after it was taken, in order per child,
// none lost or duplicated, nothing taken while up_en is low, and no child
// that keeps offering waits more than 16 enabled cycles (round-robin).
// A watchdog ends the run.
module tb_htree_bus;
  localparam int N = 16, LG = 4;
  logic clk = 0, rst_n = 0;
  logic root_req_valid = 0; logic [3:0] root_dest = 0; logic [31:0] root_req = 0;
  logic [N-1:0] child_req_valid; logic [31:0] child_req;
  logic up_en = 0;
  logic [N-1:0] child_rsp_valid = '0; logic [N-1:0][31:0] child_rsp = '0;
  logic [N-1:0] child_rsp_ready;
  logic root_rsp_valid; logic [31:0] root_rsp;

  htree_bus #(.N(N), .REQ_W(32), .RSP_W(32)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  logic [35:0] dq [$];          // {dest, payload} sent, in order
  int          dt [$];          // cycle sent
  logic [31:0] uq [$];
  int          ut [$];
  int          seqn [N];
  int          nexp [N];
  int          waitc [N];
  logic [N-1:0] taken;

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < N; c++) begin seqn[c] = 0; nexp[c] = 0; waitc[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N; c++) begin child_rsp_valid[c] = 1; child_rsp[c] = {4'(c), 28'(0)}; end
    repeat (3000) begin
      @(negedge clk);
      // root side request
      root_req_valid = ($urandom % 4) != 0;
      root_dest = 4'($urandom); root_req = $urandom;
      up_en = ($urandom % 4) != 0;
      #1;
      // upward: record the taken response
      taken = child_rsp_ready;
      for (int c = 0; c < N; c++) begin
        if (taken[c]) begin
          checks++;
          if (!child_rsp_valid[c] || !up_en) begin failures++; $display("ready without valid/up_en"); end
          uq.push_back(child_rsp[c]); ut.push_back(cyc + 1);
        end
      end
      if (root_req_valid) begin dq.push_back({root_dest, root_req}); dt.push_back(cyc + 1); end
      @(posedge clk);
      cyc++;
      #1;
      for (int c = 0; c < N; c++) begin
        if (taken[c]) begin seqn[c]++; child_rsp[c] = {4'(c), 28'(seqn[c])}; waitc[c] = 0; end
        else if (up_en) begin
          waitc[c]++;
          if (waitc[c] > N) begin failures++; $display("child %0d starved", c); waitc[c] = 0; end
        end
      end
      // downward arrivals
      if (child_req_valid != '0) begin
        automatic logic [35:0] e = dq.pop_front();
        automatic int t = dt.pop_front();
        checks++;
        if (child_req_valid != (N'(1) << e[35:32]) || child_req != e[31:0] || cyc - t != LG - 1) begin
          failures++; $display("down mismatch");
        end
      end
      if (root_rsp_valid) begin
        automatic logic [31:0] e = uq.pop_front();
        automatic int t = ut.pop_front();
        checks++;
        if (root_rsp != e || cyc - t != LG - 1 || int'(e[27:0]) != nexp[e[31:28]]) begin
          failures++; $display("up mismatch %h %h lat %0d exp %0d", root_rsp, e, cyc - t, nexp[e[31:28]]);
        end
        nexp[e[31:28]]++;
      end
    end
    checks++;
    if (dq.size() > LG || uq.size() > LG) begin failures++; $display("lost items"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
