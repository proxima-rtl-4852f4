// tb_dist_unit: PQ and accurate distances of one search queue's unit.
//
// Random ADT rows and a random query are loaded. For 20 random PQ codes the
// PQ distance must equal sum_m ADT[code_m][m] and arrive M = 32 cycles after
// start_pq; for 20 random raw vectors the accurate distance (Euclidean with
// D = 128, then inner product with D = 96) must equal the real-valued
// result and arrive D cycles after start_acc. A watchdog ends the run.
module tb_dist_unit;
  import proxima_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 256, M = 32, DMAX = 128;

  logic clk = 0, rst_n = 0;
  logic adt_we = 0; logic [7:0] adt_c = 0; fp16_t [M-1:0] adt_row = '0;
  logic q_we = 0; logic [6:0] q_idx = 0; fp16_t q_wdata = 0;
  metric_e metric = MET_L2; logic [7:0] dim = 8'd128;
  logic start_pq = 0, start_acc = 0;
  logic [M*8-1:0] pq_code = '0;
  fp16_t [DMAX-1:0] raw = '0;
  logic busy, dist_valid;
  fp16_t dist_o;

  dist_unit dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, t0 = 0;
  always @(posedge clk) begin
    cyc++;
    if ((start_pq || start_acc) && !busy) t0 = cyc;
  end
  real adt [C][M];
  real q [DMAX];

  initial begin
    #2_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wait_result(real exp, real mag, int lat, string what);
    while (!dist_valid) @(negedge clk);
    checks += 2;
    // truncating FP16 accumulation: error stays below 2.5% of the sum of |terms| at D = 128
    if (!close(f2r(dist_o), exp, 0.0, 0.025 * mag + 0.02)) begin
      failures++; $display("%s: got %f exp %f", what, f2r(dist_o), exp);
    end
    if (cyc - t0 != lat) begin failures++; $display("%s: latency %0d", what, cyc - t0); end
    @(negedge clk);
  endtask

  initial begin
    for (int c = 0; c < C; c++) for (int m = 0; m < M; m++) adt[c][m] = real'($urandom % 64) / 32.0;
    for (int i = 0; i < DMAX; i++) q[i] = real'(int'($urandom % 64) - 32) / 32.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++) begin
      adt_we = 1; adt_c = 8'(c);
      for (int m = 0; m < M; m++) adt_row[m] = r2f(adt[c][m]);
      @(negedge clk);
    end
    adt_we = 0;
    for (int i = 0; i < DMAX; i++) begin q_we = 1; q_idx = 7'(i); q_wdata = r2f(q[i]); @(negedge clk); end
    q_we = 0;
    repeat (20) begin
      automatic real e = 0.0;
      for (int m = 0; m < M; m++) begin
        pq_code[8*m +: 8] = 8'($urandom);
        e += adt[pq_code[8*m +: 8]][m];
      end
      start_pq = 1; @(negedge clk); start_pq = 0;
      wait_result(e, e, M, "pq");
    end
    for (int mode = 0; mode < 2; mode++) begin
      metric = (mode == 0) ? MET_L2 : MET_IP;
      dim = (mode == 0) ? 8'd128 : 8'd96;
      repeat (20) begin
        automatic real e = 0.0, mag = 0.0;
        for (int i = 0; i < DMAX; i++) begin
          automatic real x = real'(int'($urandom % 64) - 32) / 32.0;
          raw[i] = r2f(x);
          if (i < int'(dim)) begin
            e   += (mode == 0) ? (q[i] - x) ** 2 : -q[i] * x;
            mag += (mode == 0) ? (q[i] - x) ** 2 : ((q[i] * x < 0) ? -q[i] * x : q[i] * x);
          end
        end
        start_acc = 1; @(negedge clk); start_acc = 0;
        wait_result(e, mag, int'(dim), (mode == 0) ? "l2" : "ip");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
