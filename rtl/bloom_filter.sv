// bloom_filter: visited-vertex filter of one search queue.
//
// A 12 kB bit array with 8 hash functions remembers which vertices the queue
// has already seen, so their PQ codes are not fetched and their distances
// not computed twice. The array is split into K_HASH banks of
// M_BITS/K_HASH bits (a partitioned Bloom filter) and hash i only indexes
// bank i, so all 8 probes happen in the same cycle:
//   h_i   = (vid * HK[i]) mod 2^32, upper 16 bits
//   index = (h_i * BANK_BITS) >> 16          (range reduction)
// One request is a test-and-set: the cycle after req_valid, resp_valid
// pulses with visited = 1 if all 8 bits were already set (the vertex was
// probably seen before), and the bits are now set. A clear pulse wipes the
// array one 64-bit word per bank per cycle (BANK_BITS/64 cycles) while
// req_ready is low. Size and hash count are the paper's; the hash family,
// banking and clearing scheme are this design's choices.
module bloom_filter
  import proxima_pkg::*;
#(
  parameter int unsigned M_BITS = 98304,
  parameter int unsigned K_HASH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic req_valid,
  input  vid_t req_vid,
  output logic req_ready,
  output logic resp_valid,
  output logic visited
);
  localparam int unsigned BANK_BITS = M_BITS / K_HASH;
  localparam int unsigned NWORD     = BANK_BITS / 64;
  localparam int unsigned AW        = $clog2(NWORD);

  localparam logic [31:0] HK [8] = '{32'h9E3779B1, 32'h85EBCA77, 32'hC2B2AE3D, 32'h27D4EB2F,
                                     32'h165667B1, 32'hD3A2646D, 32'hFD7046C5, 32'hB55A4F09};

  logic [63:0] mem [K_HASH][NWORD];
  logic        clearing;
  logic [AW-1:0] clr_a;

  logic [AW-1:0] wa   [K_HASH];
  logic [5:0]    bi   [K_HASH];
  logic [K_HASH-1:0] hit;

  always_comb begin
    for (int i = 0; i < K_HASH; i++) begin
      logic [31:0] h;
      logic [31:0] idx;
      h     = 32'(req_vid) * HK[i % 8];
      idx   = (32'(h[31:16]) * BANK_BITS) >> 16;
      wa[i] = AW'(idx >> 6);
      bi[i] = idx[5:0];
      hit[i] = mem[i][wa[i]][bi[i]];
    end
  end

  assign req_ready = !clearing;

  always_ff @(posedge clk) begin
    for (int i = 0; i < K_HASH; i++) begin
      if (clearing)                   mem[i][clr_a] <= '0;
      else if (req_valid)             mem[i][wa[i]][bi[i]] <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1; clr_a <= '0; resp_valid <= 1'b0; visited <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      if (clear && !clearing) begin
        clearing <= 1'b1; clr_a <= '0;
      end else if (clearing) begin
        clr_a <= clr_a + 1'b1;
        if (clr_a == AW'(NWORD - 1)) clearing <= 1'b0;
      end else if (req_valid) begin
        resp_valid <= 1'b1;
        visited    <= &hit;
      end
    end
  end
endmodule
