// bitonic_sorter: the single N-point sorter shared by all search queues.
//
// A queue sends the sort keys of all N candidate-list slots in one cycle;
// the sorter returns, 2*log2(N) cycles later, the keys in ascending order
// together with the slot each one came from (out_perm), tagged with the
// requesting queue. The queue then reorders its own list; only keys and
// slot numbers travel through the network. A new batch may enter every
// cycle (fully pipelined), which is what lets one sorter serve all queues.
//
// The network is the standard bitonic sorter: log2(N) merge phases, phase p
// having p compare-exchange layers (36 layers for N=256). Each phase is cut
// into two register stages (the first ceil(p/2) layers, then the rest), so
// the latency is exactly 2*log2(N) cycles, the figure the paper gives for
// its sorter; where the registers sit is this design's choice.
module bitonic_sorter
  import proxima_pkg::*;
#(
  parameter int unsigned N  = 256,
  parameter int unsigned KW = 16,
  parameter int unsigned TW = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [TW-1:0]                in_tag,
  input  logic [N-1:0][KW-1:0]         in_keys,
  output logic                         out_valid,
  output logic [TW-1:0]                out_tag,
  output logic [N-1:0][KW-1:0]         out_keys,
  output logic [N-1:0][$clog2(N)-1:0]  out_perm
);
  localparam int unsigned LG = $clog2(N);
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned EW = KW + IW;
  localparam int unsigned LAT = 2 * LG;

  typedef logic [N-1:0][EW-1:0] vec_t;

  vec_t ph [LG+1];

  always_comb
    for (int i = 0; i < N; i++) ph[0][i] = {in_keys[i], IW'(i)};

  for (genvar p = 1; p <= LG; p++) begin : g_phase
    localparam int unsigned HA = (p + 1) / 2;
    localparam int unsigned HB = p - HA;
    localparam int unsigned K  = 1 << p;
    vec_t la [HA+1];
    vec_t lb [HB+1];
    vec_t ra, rb;
    assign la[0] = ph[p-1];
    for (genvar s = 0; s < HA; s++) begin : g_la
      localparam int unsigned J = 1 << (p - 1 - s);
      for (genvar i = 0; i < N; i++) begin : g_cas
        if ((i ^ J) > i) begin : g_cmp
          localparam bit ASC = ((i & K) == 0);
          wire sw = ASC ? (la[s][i][EW-1:IW] > la[s][i^J][EW-1:IW])
                        : (la[s][i][EW-1:IW] < la[s][i^J][EW-1:IW]);
          assign la[s+1][i]   = sw ? la[s][i^J] : la[s][i];
          assign la[s+1][i^J] = sw ? la[s][i]   : la[s][i^J];
        end
      end
    end
    always_ff @(posedge clk) ra <= la[HA];
    assign lb[0] = ra;
    for (genvar s = 0; s < HB; s++) begin : g_lb
      localparam int unsigned J = 1 << (p - 1 - HA - s);
      for (genvar i = 0; i < N; i++) begin : g_cas
        if ((i ^ J) > i) begin : g_cmp
          localparam bit ASC = ((i & K) == 0);
          wire sw = ASC ? (lb[s][i][EW-1:IW] > lb[s][i^J][EW-1:IW])
                        : (lb[s][i][EW-1:IW] < lb[s][i^J][EW-1:IW]);
          assign lb[s+1][i]   = sw ? lb[s][i^J] : lb[s][i];
          assign lb[s+1][i^J] = sw ? lb[s][i]   : lb[s][i^J];
        end
      end
    end
    always_ff @(posedge clk) rb <= lb[HB];
    assign ph[p] = rb;
  end

  logic [LAT-1:0]         vpipe;
  logic [LAT-1:0][TW-1:0] tpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0; tpipe <= '0;
    end else begin
      vpipe <= {vpipe[LAT-2:0], in_valid};
      tpipe <= {tpipe[LAT-2:0], in_tag};
    end
  end
  assign out_valid = vpipe[LAT-1];
  assign out_tag   = tpipe[LAT-1];
  always_comb
    for (int i = 0; i < N; i++) begin
      out_keys[i] = ph[LG][i][EW-1:IW];
      out_perm[i] = ph[LG][i][IW-1:0];
    end
endmodule
