// tb_candidate_list: the candidate list against a reference model.
//
// The testbench keeps its own copy of the list (id, PQ distance, accurate
// distance, evaluated and reranked flags) and runs 3000 random commands on
// both: appends, evaluated marks, accurate-distance writes, reorders by a
// sort permutation worked out here (with trimming to keep entries), writes
// of the previous k-NN and clears. After every command it compares n, full,
// the first unevaluated entry, the "top t all evaluated" flag, the read
// port and every sort key (PQ keys and accurate keys) with the model. A
// watchdog ends the run.
module tb_candidate_list;
  import proxima_pkg::*;
  localparam int NSLOT = 256, KMAX = 16, IW = 8;

  logic clk = 0, rst_n = 0;
  logic clr = 0, app = 0, mark_ev = 0, set_ex = 0, perm_we = 0, prev_we = 0, key_exact = 0;
  vid_t app_vid = '0; fp16_t app_pq = '0, ex_val = '0;
  logic [IW-1:0] idx = '0;
  logic [NSLOT-1:0][IW-1:0] perm = '0;
  logic [IW:0] keep = '0, top_t = '0;
  vid_t [KMAX-1:0] prev_wdata = '0;
  logic [NSLOT-1:0][15:0] keys;
  logic [IW:0] n;
  logic full, unev_found, top_all_ev, rd_rr;
  logic [IW-1:0] unev_idx;
  vid_t rd_vid; fp16_t rd_pq, rd_ex;
  vid_t [KMAX-1:0] prev_ids;

  candidate_list dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  vid_t  m_vid [NSLOT]; fp16_t m_pq [NSLOT], m_ex [NSLOT]; bit m_ev [NSLOT], m_rr [NSLOT];
  int    m_n = 0;
  vid_t [KMAX-1:0] m_prev = '0;

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fp16_t rnd_pos();
    return {1'b0, 5'(5 + $urandom % 20), 10'($urandom)};
  endfunction

  task automatic compare();
    automatic bit ok = 1;
    automatic int fu = -1;
    automatic bit tev = 1;
    for (int i = m_n - 1; i >= 0; i--) if (!m_ev[i]) fu = i;
    for (int i = 0; i < m_n && i < int'(top_t); i++) if (!m_ev[i]) tev = 0;
    if (int'(n) != m_n || full != (m_n == NSLOT)) ok = 0;
    if (unev_found != (fu >= 0) || (fu >= 0 && int'(unev_idx) != fu)) ok = 0;
    if (top_all_ev != tev) ok = 0;
    if (prev_ids != m_prev) ok = 0;
    if (int'(idx) < m_n && (rd_vid != m_vid[idx] || rd_pq != m_pq[idx] || rd_rr != m_rr[idx] ||
                            (m_rr[idx] && rd_ex != m_ex[idx]))) ok = 0;
    for (int i = 0; i < NSLOT; i++) begin
      logic [15:0] k;
      if (i >= m_n) k = KEY_EMPTY;
      else if (!key_exact) k = fp16_key(m_pq[i]);
      else k = m_rr[i] ? fp16_key(m_ex[i]) : KEY_EMPTY;
      if (keys[i] != k) ok = 0;
    end
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("mismatch at n=%0d model n=%0d", n, m_n); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    clr = 1; @(negedge clk); clr = 0; m_prev = '1;
    for (int it = 0; it < 3000; it++) begin
      automatic int op = $urandom % 100;
      idx = IW'((m_n == 0) ? 0 : $urandom % m_n);
      top_t = (IW+1)'($urandom % 40);
      key_exact = $urandom % 2;
      if (op < 45 || m_n == 0) begin
        app = 1; app_vid = vid_t'($urandom); app_pq = rnd_pos();
        if (m_n < NSLOT) begin
          m_vid[m_n] = app_vid; m_pq[m_n] = app_pq; m_ev[m_n] = 0; m_rr[m_n] = 0; m_n++;
        end
      end else if (op < 60) begin
        mark_ev = 1; m_ev[idx] = 1;
      end else if (op < 75) begin
        set_ex = 1; ex_val = rnd_pos(); m_ex[idx] = ex_val; m_rr[idx] = 1;
      end else if (op < 90) begin
        // sort by PQ key (stable), then trim to keep
        automatic int ord [NSLOT];
        vid_t  t_vid [NSLOT]; fp16_t t_pq [NSLOT], t_ex [NSLOT]; bit t_ev [NSLOT], t_rr [NSLOT];
        for (int i = 0; i < NSLOT; i++) ord[i] = i;
        for (int a = 0; a < m_n; a++)
          for (int b = 0; b < m_n - 1 - a; b++)
            if (fp16_key(m_pq[ord[b+1]]) < fp16_key(m_pq[ord[b]])) begin
              automatic int t = ord[b]; ord[b] = ord[b+1]; ord[b+1] = t;
            end
        for (int i = 0; i < NSLOT; i++) perm[i] = IW'(ord[i]);
        keep = (IW+1)'(10 + $urandom % 60);
        perm_we = 1;
        for (int i = 0; i < NSLOT; i++) begin
          t_vid[i] = m_vid[ord[i]]; t_pq[i] = m_pq[ord[i]]; t_ex[i] = m_ex[ord[i]];
          t_ev[i] = m_ev[ord[i]]; t_rr[i] = m_rr[ord[i]];
        end
        for (int i = 0; i < NSLOT; i++) begin
          m_vid[i] = t_vid[i]; m_pq[i] = t_pq[i]; m_ex[i] = t_ex[i]; m_ev[i] = t_ev[i]; m_rr[i] = t_rr[i];
        end
        if (int'(keep) < m_n) m_n = int'(keep);
      end else if (op < 98) begin
        prev_we = 1;
        for (int i = 0; i < KMAX; i++) prev_wdata[i] = vid_t'($urandom);
        m_prev = prev_wdata;
      end else begin
        clr = 1; m_n = 0; m_prev = '1;
      end
      @(negedge clk);
      app = 0; mark_ev = 0; set_ex = 0; perm_we = 0; prev_we = 0; clr = 0;
      idx = IW'((m_n == 0) ? 0 : $urandom % m_n);
      #1 compare();
    end
    // fill to full and check that a further append is dropped
    while (m_n < NSLOT) begin
      app = 1; app_vid = vid_t'($urandom); app_pq = rnd_pos();
      m_vid[m_n] = app_vid; m_pq[m_n] = app_pq; m_ev[m_n] = 0; m_rr[m_n] = 0; m_n++;
      @(negedge clk);
    end
    app = 1; @(negedge clk); app = 0;
    #1 compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
