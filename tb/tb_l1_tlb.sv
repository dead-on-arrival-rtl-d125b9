// tb_l1_tlb: self-checking test of the L1 TLB at its default size (32
// entries, fully associative, 20-cycle lookup).
//
// Random lookups, fills (always accepted), result back-pressure and rare
// flushes are applied every cycle from a pool of 48 VPNs, so the TLB fills
// up and evicts. A reference model keeps the resident VPNs in recency
// order (most recent first): a hit or fill moves a VPN to the front, a
// fill into a full TLB drops the last one, a flush empties it. Each result
// is checked for order (same VPN and tag sequence as accepted), hit/miss,
// PPN, and latency (never under 20 cycles, and exactly 20 often, in the
// phases without back-pressure).
module tb_l1_tlb;
  import depot_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic flush = 0, req_valid = 0, req_ready, res_valid, res_ready = 0, res_hit;
  vpn_t req_vpn = '0, res_vpn, fill_vpn = '0;
  req_id_t req_id = '0, res_id;
  ppn_t res_ppn, fill_ppn = '0;
  logic fill_valid = 0;
  int checks = 0, failures = 0, cyc = 0;

  l1_tlb dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  vpn_t model_vpn [$];
  ppn_t model_ppn [$];
  vpn_t q_vpn [$];
  req_id_t q_id [$];
  int q_t [$];
  int n_hit = 0, n_miss = 0, n_evict = 0, n_exact = 0, n_flush = 0;

  function automatic int find(input vpn_t v);
    foreach (model_vpn[i]) if (model_vpn[i] == v) return i;
    return -1;
  endfunction

  task automatic promote(input int i);
    vpn_t v; ppn_t p;
    v = model_vpn[i]; p = model_ppn[i];
    model_vpn.delete(i); model_ppn.delete(i);
    model_vpn.push_front(v); model_ppn.push_front(p);
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40000; k++) begin
      int phase;
      @(negedge clk);
      phase = (k / 4000) % 3;   // 0: lookups only, 1: mixed, 2: heavy fill
      req_valid = $urandom_range(0, 3) != 0;
      req_vpn   = vpn_t'($urandom_range(0, 47));
      req_id    = req_id_t'($urandom);
      res_ready = (phase == 0) ? 1'b1 : ($urandom_range(0, 4) != 0);
      fill_valid = (phase == 0) ? ($urandom_range(0, 15) == 0) : ($urandom_range(0, phase == 2 ? 1 : 5) == 0);
      fill_vpn  = vpn_t'($urandom_range(0, 47));
      fill_ppn  = ppn_t'({$urandom, $urandom});
      flush     = ($urandom_range(0, 2999) == 0);
      #1;
      if (res_valid && res_ready) begin
        int i;
        check(q_vpn.size() > 0 && q_vpn[0] == res_vpn && q_id[0] == res_id, "result order");
        check(cyc + 1 - q_t[0] >= 20, "latency at least 20");
        if (cyc + 1 - q_t[0] == 20) n_exact++;
        void'(q_vpn.pop_front()); void'(q_id.pop_front()); void'(q_t.pop_front());
        i = find(res_vpn);
        check(res_hit == (i >= 0), "hit/miss");
        if (i >= 0) begin
          check(res_ppn == model_ppn[i], "ppn");
          promote(i);
          n_hit++;
        end else n_miss++;
      end
      if (fill_valid) begin
        int i;
        check(!res_valid, "no result during a fill");
        i = find(fill_vpn);
        if (i >= 0) begin
          model_ppn[i] = fill_ppn; promote(i);
        end else begin
          if (model_vpn.size() == N) begin
            void'(model_vpn.pop_back()); void'(model_ppn.pop_back()); n_evict++;
          end
          model_vpn.push_front(fill_vpn); model_ppn.push_front(fill_ppn);
        end
      end
      if (flush) begin model_vpn.delete(); model_ppn.delete(); n_flush++; end
      if (req_valid && req_ready) begin
        q_vpn.push_back(req_vpn); q_id.push_back(req_id); q_t.push_back(cyc + 1);
      end
    end
    $display("hit=%0d miss=%0d evict=%0d exact20=%0d flush=%0d", n_hit, n_miss, n_evict, n_exact, n_flush);
    check(n_hit > 100 && n_miss > 100 && n_evict > 100 && n_flush > 0, "hits, misses, evictions, flushes exercised");
    check(n_exact > 100, "20-cycle latency without stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
