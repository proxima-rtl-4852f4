// tb_arbiter: request allocation from the search queues to the NAND cores.
//
// 8 queues issue random fetch requests (neighbour list, PQ code or raw
// vector of a random vertex among 64) and hold each until granted. A model
// of the memory side answers each forwarded request after a random delay
// with its granules, the last one flagged. Checked: a forwarded request
// carries the granted queue's tag, the core the layout rule gives
// (raw: v mod 8, graph: 8 + v mod 8), the tile (core / 4) and the segment
// count; no request goes to a core that still has one outstanding; stall is
// high exactly when some queue requests and none is granted; grants follow
// round-robin order (the granted queue is the first requesting one after the
// previous candidate); every response is passed on one cycle later
// unchanged; every request is eventually granted. The small layout makes
// conflicts on busy cores, and so stalls, frequent. A watchdog ends the run.
module tb_arbiter;
  import proxima_pkg::*;
  localparam int NQ = 8, NC = 16, NR = 8, NCT = 4;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic [NQ-1:0] q_req_valid = '0, q_gnt;
  q_req_t [NQ-1:0] q_req = '0;
  logic gnt_hot; logic [9:0] gnt_bitoff;
  logic mem_valid; logic [1:0] mem_tile; mem_req_t mem_req;
  logic rsp_in_valid = 0; mem_rsp_t rsp_in = '0;
  logic rsp_valid, stall;
  mem_rsp_t rsp;

  arbiter #(.NQ(NQ), .N_CORES(NC), .N_RAW_CORES(NR), .N_CORE(NCT)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_gnt = 0, n_stall = 0;
  bit  c_busy [NC];
  int  c_left [NC], c_wait [NC], c_tag [NC];
  int  exp_core [NQ];
  int  last_cand = -1;
  bit  busy_snap [NC];

  initial begin
    #2_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0;
    cfg.r_deg = 7'd16; cfg.w0 = 6'd8; cfg.wgap = 6'd8;
    cfg.g_nn = 6'd1; cfg.fpp_nn_lg = 3'd5; cfg.g_raw = 6'd2; cfg.fpp_raw_lg = 3'd4;
    cfg.g_hot = 6'd5; cfg.fpp_hot_lg = 3'd2; cfg.n_hot = vid_t'(4); cfg.hot_base = PAGE_W'(1);
    for (int c = 0; c < NC; c++) c_busy[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      automatic int exp_pick = -1;
      for (int c = 0; c < NC; c++) busy_snap[c] = c_busy[c];
      // new requests on idle queues
      for (int q = 0; q < NQ; q++)
        if (!q_req_valid[q] && $urandom % 4 == 0) begin
          automatic int k = $urandom % 3, v = $urandom % 64;
          q_req_valid[q] = 1; q_req[q] = '{kind: req_kind_e'(k), vid: vid_t'(v)};
          exp_core[q] = (k == 2) ? v % NR : NR + v % (NC - NR);
        end
      // memory side: one granule per cycle from the first ready core
      rsp_in_valid = 0;
      for (int c = 0; c < NC; c++)
        if (!rsp_in_valid && c_busy[c] && c_wait[c] == 0) begin
          rsp_in_valid = 1;
          rsp_in = '{tag: TAG_W'(c_tag[c]), core: 9'(c), last: (c_left[c] == 1), data: {32{$urandom}}};
          c_left[c]--;
          if (c_left[c] == 0) c_busy[c] = 0;
        end
      for (int c = 0; c < NC; c++) if (c_busy[c] && c_wait[c] > 0) c_wait[c]--;
      #1;
      // expected round-robin pick
      for (int i = NQ - 1; i >= 0; i--) if (q_req_valid[(last_cand + 1 + i) % NQ]) exp_pick = (last_cand + 1 + i) % NQ;
      checks += 2;
      if (q_req_valid != '0) begin
        if ((q_gnt != '0) != !busy_snap[exp_core[exp_pick]]) begin
          failures++; $display("grant/busy mismatch");
        end
        if (q_gnt != '0 && q_gnt != (NQ'(1) << exp_pick)) begin failures++; $display("not round-robin"); end
        last_cand = exp_pick;
      end
      if (stall != ((q_req_valid != '0) && (q_gnt == '0))) begin failures++; $display("stall flag"); end
      if (stall) n_stall++;
      @(posedge clk);
      #1;
      if (rsp_in_valid) begin
        checks++;
        if (!rsp_valid || rsp != rsp_in) begin failures++; $display("response not passed on"); end
      end
      if (mem_valid) begin
        automatic int q = int'(mem_req.tag), c = int'(mem_req.core);
        checks++;
        if (c != exp_core[q] || int'(mem_tile) != c / NCT || busy_snap[c] ||
            int'(mem_req.nseg) != ((q_req[q].kind == REQ_RAW) ? 2 : (q_req[q].kind == REQ_PQ) ? 1 :
                                   (q_req[q].vid < 4) ? 5 : 1)) begin
          failures++; $display("bad forwarded request q=%0d core=%0d", q, c);
        end
        c_busy[c] = 1; c_left[c] = int'(mem_req.nseg); c_wait[c] = 3 + $urandom % 20; c_tag[c] = q;
        q_req_valid[q] = 0;
        n_gnt++;
      end
      @(negedge clk);
    end
    checks += 2;
    if (n_gnt < 100)  begin failures++; $display("only %0d grants", n_gnt); end
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    $display("grants %0d stalls %0d", n_gnt, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
