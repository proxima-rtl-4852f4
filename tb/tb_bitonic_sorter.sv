// tb_bitonic_sorter: back-to-back batches of random keys; every output batch
// must be ascending, a permutation of its input, carry its tag, and appear
// exactly 2*log2(N) cycles after it entered.
module tb_bitonic_sorter;
  localparam int N = 256;
  localparam int LAT = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [7:0] in_tag, out_tag;
  logic [N-1:0][15:0] in_keys, out_keys;
  logic [N-1:0][7:0]  out_perm;
  logic [N-1:0][15:0] hist [8];
  int   sent_cyc [8];
  int   checks = 0, failures = 0, cyc = 0, got = 0;

  bitonic_sorter #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic bit ok = 1;
    automatic bit [N-1:0] seen = '0;
    for (int i = 0; i < N; i++) begin
      if (i > 0 && out_keys[i] < out_keys[i-1]) ok = 0;
      if (hist[out_tag[2:0]][out_perm[i]] != out_keys[i]) ok = 0;
      seen[out_perm[i]] = 1'b1;
    end
    checks += 3;
    if (!ok) failures++;
    if (seen != '1) failures++;
    if (cyc - sent_cyc[out_tag[2:0]] != LAT) begin
      failures++; $display("latency %0d", cyc - sent_cyc[out_tag[2:0]]);
    end
    got++;
  end

  initial begin
    in_valid = 0; in_tag = 0; in_keys = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      in_valid = 1; in_tag = 8'(b);
      for (int i = 0; i < N; i++)
        in_keys[i] = (b == 1) ? 16'(N - i) : (b == 2) ? 16'd7 : 16'($urandom);
      hist[b] = in_keys;
      sent_cyc[b] = cyc + 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (40) @(posedge clk);
    checks++; if (got != 8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
