// tb_tile: one NAND tile (8 cores here) with its I/O buffer and core bus.
//
// Every segment of every core is programmed with random data. Requests to
// random idle cores (1 to 3 segments, a tag per request) are sent through the
// tile's request port while rsp_ready is driven randomly. Each returned
// granule must carry the right tag, the global core id
// (TILE_ID * N_CORE + core), the programmed data of the next expected
// segment of that request, and last on the final segment only. At the end
// every requested segment must have come back exactly once. Several cores
// stream at once, so the core bus merges them. A watchdog ends the run.
module tb_tile;
  import proxima_pkg::*;
  localparam int NCORE = 8, TID = 1, PAGES = 4, NREQ = 60;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0; mem_req_t req = '0;
  logic rsp_valid, rsp_ready = 0; mem_rsp_t rsp;
  logic prog_en = 0; logic [2:0] prog_core = 0; logic [PAGE_W-1:0] prog_page = 0;
  logic [SEG_W-1:0] prog_seg = 0; logic [GRAN_BITS-1:0] prog_data = '0;

  tile #(.TILE_ID(TID), .N_CORE(NCORE), .PAGES(PAGES), .T_READ(30), .T_SEG(10)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [GRAN_BITS-1:0] img [NCORE][PAGES][32];
  bit   busy_c [NCORE];
  int   c_page [NCORE], c_seg [NCORE], c_left [NCORE], c_tag [NCORE];

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) rsp_ready <= ($urandom % 3) != 0;

  // response checker
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    automatic int c = int'(rsp.core) - TID * NCORE;
    checks++;
    if (c < 0 || c >= NCORE || !busy_c[c]) begin
      failures++; $display("granule from unexpected core %0d", rsp.core);
    end else begin
      if (int'(rsp.tag) != c_tag[c] || rsp.data != img[c][c_page[c]][c_seg[c]] ||
          rsp.last != (c_left[c] == 1)) begin
        failures++; $display("bad granule from core %0d", c);
      end
      c_seg[c]++; c_left[c]--;
      if (c_left[c] == 0) busy_c[c] = 0;
    end
    got++;
  end

  initial begin
    automatic int want = 0;
    for (int c = 0; c < NCORE; c++) busy_c[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCORE; c++)
      for (int p = 0; p < PAGES; p++)
        for (int s = 0; s < 32; s++) begin
          for (int w = 0; w < GRAN_BITS / 32; w++) img[c][p][s][32*w +: 32] = $urandom;
          prog_en = 1; prog_core = 3'(c); prog_page = PAGE_W'(p); prog_seg = SEG_W'(s);
          prog_data = img[c][p][s];
          @(negedge clk);
        end
    prog_en = 0;
    while (sent < NREQ) begin
      automatic int c = $urandom % NCORE;
      if (!busy_c[c] && $urandom % 4 == 0) begin
        c_page[c] = $urandom % PAGES; c_seg[c] = $urandom % 29; c_left[c] = 1 + $urandom % 3;
        c_tag[c] = $urandom % 256; busy_c[c] = 1; want += c_left[c];
        req_valid = 1;
        req = '{tag: TAG_W'(c_tag[c]), core: 9'(TID * NCORE + c), page: PAGE_W'(c_page[c]),
                seg: SEG_W'(c_seg[c]), nseg: 6'(c_left[c])};
        sent++;
      end
      @(negedge clk);
      req_valid = 0;
    end
    while (got < want) @(negedge clk);
    repeat (50) @(negedge clk);
    checks++;
    if (got != want) begin failures++; $display("got %0d of %0d granules", got, want); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
