// tb_scheduler: round-robin allocation of search queues to new queries.
//
// With 16 queues, random queries (go) and random completions (q_done) run
// for 4000 cycles. A reference model holds the status bits and the
// round-robin pointer. Checked every cycle: the status buffer matches the
// model (set on allocation, cleared on completion); a reserved target is an
// idle queue, and it is the first idle queue at or after the one following
// the previous allocation; a free queue is reserved again within two cycles
// of an allocation; no queue is ever reserved when all are busy. A watchdog
// ends the run.
module tb_scheduler;
  localparam int NQ = 16;
  logic clk = 0, rst_n = 0;
  logic [NQ-1:0] q_done = '0, status;
  logic go = 0, target_valid;
  logic [3:0] target;

  scheduler #(.NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, wait_cyc = 0;
  logic [NQ-1:0] m_status = '0;
  int m_ptr = 0;

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // check the current state
      checks++;
      if (status != m_status) begin failures++; $display("status %h model %h", status, m_status); end
      if (target_valid) begin
        automatic int exp = -1;
        for (int i = NQ - 1; i >= 0; i--) if (!m_status[(m_ptr + i) % NQ]) exp = (m_ptr + i) % NQ;
        checks++;
        if (int'(target) != exp) begin failures++; $display("target %0d exp %0d", target, exp); end
        wait_cyc = 0;
      end else if (m_status != '1) begin
        wait_cyc++;
        checks++;
        if (wait_cyc > 2) begin failures++; $display("no target with a free queue"); end
      end
      // drive
      go = target_valid && ($urandom % 3 == 0);
      q_done = '0;
      for (int q = 0; q < NQ; q++) if (m_status[q] && $urandom % 8 == 0) q_done[q] = 1'b1;
      @(posedge clk);
      m_status = m_status & ~q_done;
      if (go) begin m_status[target] = 1'b1; m_ptr = (int'(target) + 1) % NQ; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
