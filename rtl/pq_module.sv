// pq_module: computes a query's asymmetric distance table (ADT).
//
// The codebook memory holds C centroids for each of M subspaces, D/M FP16
// coordinates each (64 kB for C=256, D=128). It is split into M banks, one
// per subspace, and MAC m works on subspace m only, so the M=32 MACs run in
// lock-step. For every centroid c the unit walks the D/M coordinates j of the
// subspace and accumulates
//   Euclidean:      ADT[m][c] = sum_j (q[m*D/M+j] - cb[m][c][j])^2
//   inner product:  ADT[m][c] = sum_j -q[m*D/M+j] * cb[m][c][j]
// A Euclidean coordinate uses three MAC cycles (subtract, square, add), an
// inner-product coordinate one, so a whole table takes C*D/M*3 = 24D or
// C*D/M = 8D cycles, the latency range the paper quotes for its PQ module.
// The inner-product table is negated so that a smaller value always means a
// nearer vector (this design's choice).
//
// Interface: codebook words are written through cb_we/cb_m/cb_c/cb_j, query
// elements through q_we/q_idx. A start pulse (with metric and dsub = D/M
// sampled) runs the table; for each centroid one adt_valid pulse carries the
// M entries of row c. done pulses once after the last row.
module pq_module
  import proxima_pkg::*;
#(
  parameter int unsigned C        = 256,
  parameter int unsigned M        = 32,
  parameter int unsigned DSUB_MAX = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // codebook memory write port
  input  logic                         cb_we,
  input  logic [$clog2(M)-1:0]         cb_m,
  input  logic [$clog2(C)-1:0]         cb_c,
  input  logic [$clog2(DSUB_MAX)-1:0]  cb_j,
  input  fp16_t                        cb_wdata,
  // query vector write port
  input  logic                         q_we,
  input  logic [$clog2(M*DSUB_MAX)-1:0] q_idx,
  input  fp16_t                        q_wdata,
  // control
  input  logic                         start,
  input  metric_e                      metric,
  input  logic [2:0]                   dsub,
  output logic                         busy,
  output logic                         adt_valid,
  output logic [$clog2(C)-1:0]         adt_c,
  output fp16_t [M-1:0]                adt_row,
  output logic                         done
);
  localparam int unsigned CW = $clog2(C);
  localparam int unsigned JW = $clog2(DSUB_MAX);
  localparam int unsigned DW = $clog2(M*DSUB_MAX);

  fp16_t cb_mem [M][C*DSUB_MAX];
  fp16_t qv     [M*DSUB_MAX];

  always_ff @(posedge clk) begin
    if (cb_we) cb_mem[cb_m][{cb_c, cb_j}] <= cb_wdata;
    if (q_we)  qv[q_idx] <= q_wdata;
  end

  logic [CW-1:0] c_q;
  logic [JW-1:0] j_q;
  logic [1:0]    ph_q;
  metric_e       met_q;
  logic [2:0]    dsub_q;
  fp16_t         acc_q [M];
  fp16_t         tmp_q [M];
  fp16_t         mac_y [M];
  mac_op_e       op;

  always_comb begin
    if (met_q == MET_IP) op = OP_MAC;
    else unique case (ph_q)
      2'd0:    op = OP_SUB;
      2'd1:    op = OP_MUL;
      default: op = OP_ADD;
    endcase
  end

  for (genvar m = 0; m < M; m++) begin : g_mac
    logic [DW-1:0] qi;
    fp16_t a, b, cbv, qel, accin;
    always_comb begin
      qi    = DW'(m * int'(dsub_q) + int'(j_q));
      cbv   = cb_mem[m][{c_q, j_q}];
      qel   = qv[qi];
      accin = (j_q == '0) ? 16'd0 : acc_q[m];
      a = qel; b = cbv;
      if (met_q == MET_IP) a = fp16_neg(qel);
      else if (ph_q == 2'd1) begin a = tmp_q[m]; b = tmp_q[m]; end
      else if (ph_q == 2'd2) begin a = accin;    b = tmp_q[m]; end
    end
    fp16_mac u_mac (.op(op), .a(a), .b(b), .acc(accin), .y(mac_y[m]));
  end

  wire last_ph = (met_q == MET_IP) || (ph_q == 2'd2);
  wire last_j  = (32'(j_q) == 32'(dsub_q) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; c_q <= '0; j_q <= '0; ph_q <= '0;
      met_q <= MET_L2; dsub_q <= 3'd1;
      adt_valid <= 1'b0; adt_c <= '0; done <= 1'b0;
    end else begin
      adt_valid <= 1'b0;
      done      <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; c_q <= '0; j_q <= '0; ph_q <= '0;
          met_q <= metric; dsub_q <= dsub;
        end
      end else begin
        if (!last_ph) ph_q <= ph_q + 2'd1;
        else begin
          ph_q <= '0;
          if (!last_j) j_q <= j_q + 1'b1;
          else begin
            j_q <= '0;
            adt_valid <= 1'b1;
            adt_c     <= c_q;
            if (c_q == CW'(C - 1)) begin busy <= 1'b0; done <= 1'b1; end
            else c_q <= c_q + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < M; m++) begin
      if (busy) begin
        if (met_q == MET_L2 && ph_q != 2'd2) tmp_q[m] <= mac_y[m];
        if (last_ph) acc_q[m] <= mac_y[m];
        if (last_ph && last_j) adt_row[m] <= mac_y[m];
      end
    end
  end

endmodule
