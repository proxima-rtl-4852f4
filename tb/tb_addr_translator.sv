// tb_addr_translator: vertex id to NAND address.
//
// For 3000 random (kind, vertex) pairs under three layouts the core, page,
// first segment, segment count, hot flag and PQ bit offset are compared
// with the layout rules written out here:
//   raw vector:  core = v mod NR, slot = v div NR
//   graph data:  core = NR + (v mod NG), slot = v div NG
//   page = base + slot div 2^fpp, segment = (slot mod 2^fpp) * g
//   a hot vertex (v < n_hot) is read from its hot frame at hot_base;
//   a PQ code is read from the normal frame at bit w0 + (R-1)*wgap, one or
//   two segments depending on whether it crosses a 1024-bit boundary.
module tb_addr_translator;
  import proxima_pkg::*;
  localparam int NC = 512, NR = 256, NG = NC - NR;

  cfg_t cfg;
  req_kind_e kind;
  vid_t vid;
  logic [8:0] core; logic [PAGE_W-1:0] page; logic [SEG_W-1:0] seg; logic [5:0] nseg;
  logic hot; logic [9:0] pq_bitoff;

  addr_translator dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < 3; l++) begin
      cfg = '0;
      cfg.r_deg = 7'((l == 0) ? 64 : (l == 1) ? 32 : 16);
      cfg.w0 = 6'((l == 0) ? 30 : 24); cfg.wgap = 6'((l == 0) ? 26 : 20);
      cfg.n_hot = vid_t'(30000 * (l + 1));
      cfg.g_nn = 6'((l == 0) ? 2 : 1); cfg.fpp_nn_lg = 3'((l == 0) ? 4 : 5);
      cfg.g_hot = 6'((l == 0) ? 18 : 9); cfg.fpp_hot_lg = 3'((l == 0) ? 0 : 1);
      cfg.hot_base = PAGE_W'(100000);
      cfg.g_raw = 6'((l == 2) ? 1 : 2); cfg.fpp_raw_lg = 3'((l == 2) ? 5 : 4);
      for (int i = 0; i < 1000; i++) begin
        automatic int k = $urandom % 3;
        automatic int v = $urandom % (1 << 24);
        automatic int ecore, eslot, epage, eseg, enseg, g, fpp, base, off;
        automatic bit ehot = 0;
        if (i % 5 == 0) v = $urandom % (cfg.n_hot + 10);
        kind = req_kind_e'(k); vid = vid_t'(v);
        off = int'(cfg.w0) + (int'(cfg.r_deg) - 1) * int'(cfg.wgap);
        if (k == 2) begin
          ecore = v % NR; eslot = v / NR; g = cfg.g_raw; fpp = cfg.fpp_raw_lg; base = 0;
        end else begin
          ecore = NR + v % NG; eslot = v / NG;
          ehot = (k == 0) && (v < int'(cfg.n_hot));
          g = ehot ? cfg.g_hot : cfg.g_nn; fpp = ehot ? cfg.fpp_hot_lg : cfg.fpp_nn_lg;
          base = ehot ? int'(cfg.hot_base) : 0;
        end
        epage = base + (eslot >> fpp);
        eseg = (eslot % (1 << fpp)) * g;
        enseg = g;
        if (k == 1) begin
          eseg += off / 1024;
          enseg = ((off % 1024) + 256 > 1024) ? 2 : 1;
        end
        #1;
        checks++;
        if (int'(core) != ecore || int'(page) != epage || int'(seg) != eseg % 32 ||
            int'(nseg) != enseg || hot != ehot || (k == 1 && int'(pq_bitoff) != off % 1024)) begin
          failures++;
          if (failures < 5) $display("kind %0d v %0d: core %0d/%0d page %0d/%0d seg %0d/%0d nseg %0d/%0d",
                                     k, v, core, ecore, page, epage, seg, eseg, nseg, enseg);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
