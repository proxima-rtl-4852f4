// tb_bloom_filter: visited-vertex test of one search queue.
//
// After the reset sweep (req_ready high), 1000 distinct random vertex ids are
// inserted; each first test must answer "not visited" except for rare false
// positives, and its answer must arrive exactly one cycle after the request.
// A second pass over the same ids must answer "visited" for every one (a
// Bloom filter has no false negatives). Then 1000 fresh ids are tested: the
// false-positive rate must stay below 2% (with 98304 bits, 8 hashes and
// 2000 entries the expected rate is about 0.002%). A clear must take the
// filter back to empty. A watchdog ends the run.
module tb_bloom_filter;
  import proxima_pkg::*;
  localparam int N = 1000;

  logic clk = 0, rst_n = 0;
  logic clear = 0, req_valid = 0;
  vid_t req_vid = '0;
  logic req_ready, resp_valid, visited;

  bloom_filter dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  vid_t ids [N];

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic test(vid_t v, output bit vis);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_vid = v;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!resp_valid) begin failures++; $display("no response one cycle after request"); end
    vis = visited;
  endtask

  initial begin
    automatic int fp = 0;
    bit vis;
    for (int i = 0; i < N; i++) ids[i] = vid_t'(i * 7919 + ($urandom % 7919));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin test(ids[i], vis); if (vis) fp++; end
    checks++; if (fp > 5) begin failures++; $display("first pass: %0d already visited", fp); end
    for (int i = 0; i < N; i++) begin
      test(ids[i], vis); checks++;
      if (!vis) begin failures++; $display("false negative for %0d", ids[i]); end
    end
    fp = 0;
    for (int i = 0; i < N; i++) begin test(vid_t'(10_000_000 + i * 13), vis); if (vis) fp++; end
    checks++; if (fp > N / 50) begin failures++; $display("false positives %0d", fp); end
    clear = 1; @(negedge clk); clear = 0;
    fp = 0;
    for (int i = 0; i < N; i++) begin test(ids[i], vis); if (vis) fp++; end
    checks++; if (fp > 5) begin failures++; $display("after clear: %0d visited", fp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
