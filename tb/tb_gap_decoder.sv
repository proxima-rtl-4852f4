// tb_gap_decoder: decoding of gap-encoded neighbour frames.
//
// Frames are built here from sorted neighbour lists: the first id in w0
// bits, each further id as its difference to the previous one in wgap bits,
// least significant bit first, then the vertex's own 256-bit PQ code. Hot
// frames put each neighbour's PQ code right after its id. Cases:
//   - rows of the form used to illustrate gap encoding: 3 neighbours, a
//     32-bit first id and 5-bit gaps (42 bits per row);
//   - 30 random normal frames with R = 64, w0 = 30, wgap = 20 (up to 30
//     granules of the frame buffer);
//   - 10 random hot frames with R = 16, w0 = 24, wgap = 16.
// The decoder's output stream (ids, and PQ codes for hot frames) must match
// the list exactly, done must pulse once, and the output handshake is
// exercised with random out_ready. The extract port and the raw-vector
// window are checked on random positions. A watchdog ends the run.
module tb_gap_decoder;
  import proxima_pkg::*;
  localparam int FMAX = 32;
  localparam int FB = FMAX * GRAN_BITS;

  logic clk = 0, rst_n = 0;
  logic gran_we = 0; logic [4:0] gran_addr = 0; logic [GRAN_BITS-1:0] gran_data = '0;
  logic start = 0, hot = 0; logic [6:0] r_deg = 0; logic [5:0] w0 = 0, wgap = 0;
  logic out_valid, out_is_pq, out_ready, done;
  vid_t out_vid; logic [PQ_BITS-1:0] out_pq, ext_pq;
  logic [14:0] ext_pos = '0;
  logic [2*GRAN_BITS-1:0] raw_pair;

  gap_decoder dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [FB-1:0] img;

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic put(ref int pos, input logic [255:0] v, input int w);
    for (int i = 0; i < w; i++) img[pos + i] = v[i];
    pos += w;
  endtask

  task automatic load();
    for (int g = 0; g < FMAX; g++) begin
      gran_we = 1; gran_addr = 5'(g); gran_data = img[g*GRAN_BITS +: GRAN_BITS];
      @(negedge clk);
    end
    gran_we = 0;
  endtask

  task automatic run_frame(int r, int w_0, int w_g, bit is_hot, int maxgap);
    vid_t ids [64];
    logic [255:0] pqs [64];
    int pos = 0, got = 0, ndone = 0;
    bit ok = 1;
    img = '0;
    ids[0] = vid_t'($urandom % (1 << (w_0 > 29 ? 29 : w_0 - 1)));
    for (int j = 1; j < r; j++) ids[j] = ids[j-1] + vid_t'($urandom % maxgap);
    for (int j = 0; j < r; j++) pqs[j] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    put(pos, 256'(ids[0]), w_0);
    if (is_hot) put(pos, pqs[0], 256);
    for (int j = 1; j < r; j++) begin
      put(pos, 256'(ids[j] - ids[j-1]), w_g);
      if (is_hot) put(pos, pqs[j], 256);
    end
    put(pos, {8{32'hA5A5_5A5A}}, 256);
    load();
    start = 1; hot = is_hot; r_deg = 7'(r); w0 = 6'(w_0); wgap = 6'(w_g);
    @(negedge clk); start = 0;
    while (ndone == 0) begin
      out_ready = ($urandom % 4) != 0;
      #1;
      if (done) ndone++;
      if (out_valid && out_ready) begin
        automatic int j = is_hot ? got / 2 : got;
        if (is_hot && (got % 2 == 1)) begin
          if (!out_is_pq || out_pq != pqs[j]) ok = 0;
        end else if (out_is_pq || out_vid != ids[j]) ok = 0;
        got++;
      end
      @(negedge clk);
      if (done) ndone++;
    end
    repeat (3) begin @(negedge clk); if (done || out_valid) ok = 0; end
    checks += 2;
    if (!ok) begin failures++; $display("stream mismatch r=%0d hot=%0d", r, is_hot); end
    if (got != (is_hot ? 2 * r : r)) begin failures++; $display("got %0d fields", got); end
  endtask

  initial begin
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (4) run_frame(3, 32, 5, 0, 32);
    repeat (30) run_frame(64, 30, 20, 0, 1 << 19);
    repeat (10) run_frame(16, 24, 16, 1, 1 << 15);
    // extract port and raw window
    for (int g = 0; g < FMAX; g++)
      for (int w = 0; w < GRAN_BITS / 32; w++) img[g*GRAN_BITS + 32*w +: 32] = $urandom;
    load();
    for (int i = 0; i < 50; i++) begin
      automatic int p = $urandom % ((FMAX - 1) * GRAN_BITS);
      ext_pos = 15'(p); #1;
      checks++;
      if (ext_pq != img[p +: 256]) begin failures++; $display("extract at %0d", p); end
      @(negedge clk);
    end
    checks++;
    if (raw_pair != img[(FMAX-4)*GRAN_BITS +: 2*GRAN_BITS]) begin failures++; $display("raw window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
