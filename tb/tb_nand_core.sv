// tb_nand_core: one 3D NAND core with its behavioural array.
//
// Every segment of every page is programmed with random data. Then 40
// random reads (page, first segment, 1 to 4 segments, random tag) are
// issued, with random back-pressure on io_ready. Checked: every 16-bit beat
// against the programmed data (64 beats per 128-byte segment, low bits
// first), the tag, the segment-last and last markers, busy from request to
// last beat, and the timing at the default 1 GHz values: the first beat
// comes T_READ + 1 = 301 cycles after the request (300 cycles of word-line
// setup and sensing, one to load the page buffer), and each further segment
// of the same word line T_SEG + 1 = 101 cycles after the previous segment's
// last beat. A watchdog ends the run.
module tb_nand_core;
  import proxima_pkg::*;
  localparam int PAGES = 16, T_READ = 300, T_SEG = 100;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0; mem_req_t req = '0;
  logic busy, io_valid, io_seg_last, io_last, io_ready = 1;
  logic [15:0] io_data; logic [TAG_W-1:0] io_tag;
  logic prog_en = 0; logic [PAGE_W-1:0] prog_page = 0; logic [SEG_W-1:0] prog_seg = 0;
  logic [GRAN_BITS-1:0] prog_data = '0;

  nand_core dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  logic [GRAN_BITS-1:0] img [PAGES][32];

  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < PAGES; p++)
      for (int s = 0; s < 32; s++) begin
        for (int w = 0; w < GRAN_BITS / 32; w++) img[p][s][32*w +: 32] = $urandom;
        prog_en = 1; prog_page = PAGE_W'(p); prog_seg = SEG_W'(s); prog_data = img[p][s];
        @(negedge clk);
      end
    prog_en = 0;
    repeat (40) begin
      automatic int p = $urandom % PAGES, s0 = $urandom % 29, ns = 1 + $urandom % 4;
      automatic int t_req, t_last = 0;
      automatic bit ok = 1, okt = 1;
      req_valid = 1;
      req = '{tag: TAG_W'($urandom), core: 9'd0, page: PAGE_W'(p), seg: SEG_W'(s0), nseg: 6'(ns)};
      @(negedge clk);
      t_req = cyc;
      req_valid = 0;
      for (int s = 0; s < ns; s++)
        for (int b = 0; b < 64; b++) begin
          automatic int t_valid = -1;
          do begin
            io_ready = ($urandom % 3) != 0;
            if (!busy) ok = 0;
            #1;
            if (io_valid && t_valid < 0) t_valid = cyc;
            if (io_valid && io_ready) break;
            @(negedge clk);
          end while (1);
          if (b == 0) begin
            automatic int exp = (s == 0) ? T_READ + 1 : T_SEG + 1;
            automatic int ref_t = (s == 0) ? t_req : t_last;
            if (t_valid - ref_t != exp) begin
              okt = 0; $display("segment %0d: first beat after %0d cycles", s, t_valid - ref_t);
            end
          end
          if (io_data != img[p][s0 + s][16*b +: 16] || io_tag != req.tag ||
              io_seg_last != (b == 63) || io_last != (b == 63 && s == ns - 1)) ok = 0;
          @(negedge clk);
          if (b == 63) t_last = cyc;
        end
      io_ready = 1;
      #1;
      checks += 2;
      if (busy) ok = 0;
      if (!ok)  begin failures++; $display("data/flags mismatch p=%0d s=%0d n=%0d", p, s0, ns); end
      if (!okt) begin failures++; $display("timing mismatch p=%0d s=%0d n=%0d", p, s0, ns); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
