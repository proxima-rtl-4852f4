// dist_unit: the distance computation module of one search queue.
//
// It holds the queue's ADT memory (C rows of M FP16 entries, 16 kB), the
// query buffer (up to DMAX FP16 elements) and one FP16 MAC. Two operations:
//   PQ distance:       dist = sum_i ADT[i][code_i], one subspace per cycle,
//                      M cycles for a 256-bit code of M 8-bit centroid ids.
//   accurate distance: dist = sum_d (q_d - x_d)^2 (Euclidean) or
//                      sum_d -q_d*x_d (inner product), one element per cycle,
//                      dim cycles. The subtraction ahead of the MAC is a
//                      small adder; the paper speaks of one MAC per queue.
// The operand (pq_code or raw) must stay stable while busy. dist_valid
// pulses with the result M (or dim) cycles after the start pulse.
// ADT rows arrive from the PQ module through adt_we; query elements through
// q_we. Cycle counts follow the paper; the split into a subtractor plus MAC
// for Euclidean terms is this design's choice.
module dist_unit
  import proxima_pkg::*;
#(
  parameter int unsigned C    = 256,
  parameter int unsigned M    = 32,
  parameter int unsigned DMAX = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     adt_we,
  input  logic [$clog2(C)-1:0]     adt_c,
  input  fp16_t [M-1:0]            adt_row,
  input  logic                     q_we,
  input  logic [$clog2(DMAX)-1:0]  q_idx,
  input  fp16_t                    q_wdata,
  input  metric_e                  metric,
  input  logic [7:0]               dim,
  input  logic                     start_pq,
  input  logic [M*8-1:0]           pq_code,
  input  logic                     start_acc,
  input  fp16_t [DMAX-1:0]         raw,
  output logic                     busy,
  output logic                     dist_valid,
  output fp16_t                    dist_o
);
  fp16_t [M-1:0] adt_mem [C];
  fp16_t         qbuf [DMAX];

  always_ff @(posedge clk) begin
    if (adt_we) adt_mem[adt_c] <= adt_row;
    if (q_we)   qbuf[q_idx]    <= q_wdata;
  end

  logic        mode_acc;
  logic [7:0]  i_q;
  fp16_t       acc_q;
  fp16_t       a, b, y;
  mac_op_e     op;
  logic [7:0]  code;
  fp16_t       qe, xe;

  always_comb begin
    code = pq_code[8*i_q[$clog2(M)-1:0] +: 8];
    qe   = qbuf[i_q[$clog2(DMAX)-1:0]];
    xe   = raw[i_q[$clog2(DMAX)-1:0]];
    if (!mode_acc) begin
      op = OP_ADD; a = acc_q; b = adt_mem[code][i_q[$clog2(M)-1:0]];
    end else if (metric == MET_L2) begin
      op = OP_MAC; a = fp16_add(qe, fp16_neg(xe)); b = a;
    end else begin
      op = OP_MAC; a = fp16_neg(qe); b = xe;
    end
  end

  fp16_mac u_mac (.op(op), .a(a), .b(b), .acc(acc_q), .y(y));

  wire [7:0] n_last = mode_acc ? dim - 8'd1 : 8'(M - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; mode_acc <= 1'b0; i_q <= '0; acc_q <= '0;
      dist_valid <= 1'b0; dist_o <= '0;
    end else begin
      dist_valid <= 1'b0;
      if (!busy) begin
        if (start_pq || start_acc) begin
          busy <= 1'b1; mode_acc <= start_acc; i_q <= '0; acc_q <= '0;
        end
      end else begin
        acc_q <= y;
        i_q   <= i_q + 8'd1;
        if (i_q == n_last) begin
          busy <= 1'b0; dist_valid <= 1'b1; dist_o <= y;
        end
      end
    end
  end
endmodule
