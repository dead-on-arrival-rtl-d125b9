// tb_l2_tlb: random lookups, fills (some protected) and kernel flushes on
// a 64-entry, 16-way instance with the 80-cycle lookup pipeline, checked
// against a reference model that keeps LRU order as a list. Checks hit,
// PPN, lookup latency, every victim choice (evicted VPN, protection skip,
// LRU fallback, duplicate fill) and that each cascade stage occurs.
module tb_l2_tlb;
  import depot_pkg::*;
  localparam int WAYS = 16, SETS = 4, LAT = 80;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, res_valid, res_ready = 1, res_hit;
  vpn_t req_vpn = '0, res_vpn, fill_vpn = '0, evict_vpn;
  req_id_t req_id = '0, res_id;
  ppn_t res_ppn, fill_ppn = '0;
  logic fill_valid = 0, fill_protect = 0, kernel_flush = 0;
  timer_t fill_protect_until = '0, now;
  logic evict_valid, victim_skip, victim_fallback, fill_dup;
  logic [3:0] victim_way;
  logic [6:0] protected_count;
  int unsigned cyc = 0;
  int checks = 0, failures = 0;
  int n_p1 = 0, n_p2skip = 0, n_p3 = 0, n_dup = 0, n_hit = 0, n_miss = 0;

  // reference
  bit          m_valid [SETS][WAYS];
  vpn_t        m_vpn   [SETS][WAYS];
  ppn_t        m_ppn   [SETS][WAYS];
  bit          m_pact  [SETS][WAYS];
  int unsigned m_until [SETS][WAYS];
  int          m_lru   [SETS][$];     // front = most recently used

  l2_tlb #(.ENTRIES(64), .WAYS(16), .LOOKUP_LAT(LAT)) dut (.*);

  assign now = timer_t'(cyc);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0d", what, cyc); end
  endtask
  function automatic bit m_prot(input int s, input int w);
    return m_pact[s][w] && (m_until[s][w] > cyc);
  endfunction
  task automatic m_touch(input int s, input int w);
    foreach (m_lru[s][i]) if (m_lru[s][i] == w) begin m_lru[s].delete(i); break; end
    m_lru[s].push_front(w);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) begin
      m_valid[s][w] = 0; m_pact[s][w] = 0; m_lru[s].push_back(w);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 2500; n++) begin
      int op, s, hw, lat;
      vpn_t v;
      v  = {$urandom_range(40), 2'($urandom_range(3))};
      s  = int'(v[1:0]);
      hw = -1;
      for (int w = 0; w < WAYS; w++) if (m_valid[s][w] && m_vpn[s][w] == v) hw = w;
      op = $urandom_range(9);
      if (op == 9 && $urandom_range(30) != 0) op = 0;
      if (op < 3) begin
        // lookup
        req_valid = 1; req_vpn = v; req_id = req_id_t'(n);
        @(negedge clk);
        req_valid = 0;
        lat = 1;
        while (!res_valid && lat < 200) begin @(negedge clk); lat++; end
        check(lat == LAT, "lookup latency");
        check(res_vpn == v && res_id == req_id_t'(n), "result tag");
        check(res_hit == (hw >= 0), "hit/miss");
        if (hw >= 0) begin
          check(res_ppn == m_ppn[s][hw], "ppn");
          m_touch(s, hw);
          n_hit++;
        end else n_miss++;
        @(negedge clk);
      end else if (op < 9 || n < 64) begin
        // fill
        int vw, lru, stage;
        bit skip;
        fill_valid = 1; fill_vpn = v; fill_ppn = {$urandom, 4'h0};
        fill_protect = ($urandom_range(9) < 6);
        fill_protect_until = timer_t'(cyc + $urandom_range(30000, 1));
        #1;
        lru = m_lru[s][$];
        skip = 0;
        if (hw >= 0) begin
          vw = hw; stage = 0; n_dup++;
        end else begin
          vw = -1;
          for (int w = 0; w < WAYS && vw < 0; w++) if (!m_valid[s][w]) vw = w;
          stage = 1;
          if (vw < 0) begin
            for (int i = WAYS-1; i >= 0 && vw < 0; i--) if (!m_prot(s, m_lru[s][i])) vw = m_lru[s][i];
            stage = 2;
            if (vw < 0) begin vw = lru; stage = 3; end
            else skip = (vw != lru);
          end
        end
        check(fill_dup == (stage == 0), "duplicate fill");
        check(victim_way == 4'(vw), "victim way");
        check(evict_valid == (stage >= 2), "evict valid");
        if (stage >= 2) check(evict_vpn == m_vpn[s][vw], "evicted vpn");
        check(victim_skip == skip, "protection skip");
        check(victim_fallback == (stage == 3), "LRU fallback");
        if (stage == 1) n_p1++;
        if (skip) n_p2skip++;
        if (stage == 3) n_p3++;
        @(negedge clk);
        fill_valid = 0;
        m_valid[s][vw] = 1; m_vpn[s][vw] = v; m_ppn[s][vw] = fill_ppn;
        if (fill_protect) begin m_pact[s][vw] = 1; m_until[s][vw] = int'(fill_protect_until); end
        else if (stage != 0) m_pact[s][vw] = 0;
        m_touch(s, vw);
      end else begin
        kernel_flush = 1;
        @(negedge clk);
        kernel_flush = 0;
        for (int a = 0; a < SETS; a++) for (int w = 0; w < WAYS; w++) m_pact[a][w] = 0;
        check(protected_count == 0, "flush clears protection");
      end
    end
    check(n_p1 > 0 && n_p2skip > 0 && n_p3 > 0 && n_dup > 0 && n_hit > 0 && n_miss > 0, "all cases seen");
    $display("p1=%0d skip=%0d fallback=%0d dup=%0d hit=%0d miss=%0d", n_p1, n_p2skip, n_p3, n_dup, n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
