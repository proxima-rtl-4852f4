// tb_pq_module: the PQ module builds the asymmetric distance table (ADT).
//
// A random codebook (256 centroids per subspace, small FP16 values) and
// query are loaded. Two tables are computed: Euclidean with D = 64 (two
// elements per subspace) and inner product with D = 32 (one element). Every
// ADT entry is compared with the table worked out in real arithmetic:
//   L2: ADT[c][m] = sum_j (q[m*dsub+j] - cb[m][c][j])^2
//   IP: ADT[c][m] = sum_j -q[m*dsub+j] * cb[m][c][j]
// The run time from start to done is checked against the paper's ADT
// latency with 32 MACs and 256 centroids: 24*D cycles for Euclidean and
// 8*D cycles for inner product. A watchdog ends the run.
module tb_pq_module;
  import proxima_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 256, M = 32, DS = 4;

  logic clk = 0, rst_n = 0;
  logic cb_we = 0; logic [4:0] cb_m = 0; logic [7:0] cb_c = 0; logic [1:0] cb_j = 0; fp16_t cb_wdata = 0;
  logic q_we = 0; logic [6:0] q_idx = 0; fp16_t q_wdata = 0;
  logic start = 0; metric_e metric = MET_L2; logic [2:0] dsub = 1;
  logic busy, adt_valid, done;
  logic [7:0] adt_c;
  fp16_t [M-1:0] adt_row;

  pq_module dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, t0 = 0, rows = 0, bad = 0;
  always @(posedge clk) begin
    cyc++;
    if (start && !busy) t0 = cyc;
  end
  real cb [M][C][DS];
  real q  [M*DS];

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && adt_valid) begin
    for (int m = 0; m < M; m++) begin
      automatic real e = 0.0;
      for (int j = 0; j < int'(dsub); j++)
        if (metric == MET_L2) e += (q[m*dsub+j] - cb[m][adt_c][j]) ** 2;
        else                  e += -q[m*dsub+j] * cb[m][adt_c][j];
      checks++;
      if (!close(f2r(adt_row[m]), e, 0.02, 0.01)) begin
        failures++;
        if (bad++ < 5) $display("c=%0d m=%0d got %f exp %f", adt_c, m, f2r(adt_row[m]), e);
      end
    end
    rows++;
  end

  task automatic run(metric_e met, int ds);
    int d = M * ds, lat;
    @(negedge clk);
    metric = met; dsub = 3'(ds); start = 1; rows = 0;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    @(negedge clk);
    checks += 2;
    if (rows != C) begin failures++; $display("rows %0d", rows); end
    if (lat != ((met == MET_L2) ? 24 * d : 8 * d)) begin
      failures++; $display("latency %0d for D=%0d", lat, d);
    end
  endtask

  initial begin
    for (int m = 0; m < M; m++)
      for (int c = 0; c < C; c++)
        for (int j = 0; j < DS; j++) cb[m][c][j] = real'(int'($urandom % 64) - 32) / 16.0;
    for (int i = 0; i < M * DS; i++) q[i] = real'(int'($urandom % 64) - 32) / 16.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < M; m++)
      for (int c = 0; c < C; c++)
        for (int j = 0; j < DS; j++) begin
          @(negedge clk);
          cb_we = 1; cb_m = 5'(m); cb_c = 8'(c); cb_j = 2'(j); cb_wdata = r2f(cb[m][c][j]);
        end
    @(negedge clk) cb_we = 0;
    // query element index is m * dsub + j; D = 64 layout first
    for (int i = 0; i < M * DS; i++) begin
      @(negedge clk); q_we = 1; q_idx = 7'(i); q_wdata = r2f(q[i]);
    end
    @(negedge clk) q_we = 0;
    run(MET_L2, 2);
    run(MET_IP, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
