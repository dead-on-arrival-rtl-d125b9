// tb_depot_l2_subsystem: end-to-end run of the L2 translation level with
// DEPOT, on a reduced L2 TLB (64 entries, 16 ways) so that evictions,
// re-walks and protection happen within a short simulation; every other
// size (80-cycle lookup, 128x8 MSHR, 16 walkers, 32-entry page-walk cache,
// 8192-bit filter, 16-slot PDS) is the default except the filter clear
// interval (64 insertions) and W (4000 cycles, written through the CSR).
//
// Traffic: a shared-page phase (bursts of requests to a few hot VPNs mixed
// with a stream of other pages, like warps that all read x[j]), a kernel
// boundary, then a capacity phase that cycles over more pages than the TLB
// holds. Page tables come from the behavioural DRAM model (254 cycles).
//
// Checks: every request is answered exactly once, with the reference
// translation; a hit answers after exactly 80 cycles when nothing stalls;
// and each mechanism occurs at least once: hit, miss, MSHR merge, walk
// queued behind busy walkers, page-walk-cache hit, dead-entry miss, PDS
// registration, protected fill, protection skip, plain-LRU fallback,
// filter clear, kernel-boundary flush, MSHR back-pressure.
module tb_depot_l2_subsystem;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, resp_valid;
  vpn_t req_vpn = '0, resp_vpn;
  req_id_t req_id = '0, resp_id;
  ppn_t resp_ppn;
  ppn_t root = 36'h0_0042_4242;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  pa_t mem_req_addr;
  logic [3:0] mem_req_tag, mem_resp_tag;
  logic [63:0] mem_resp_data;
  timer_t cycle_now;
  logic kernel_boundary = 0, bloom_saturate = 0, csr_we = 0, stats_clear = 0;
  logic [1:0] csr_addr = '0;
  logic [31:0] csr_wdata = '0;
  logic [31:0] stat_dead_entry_miss, stat_protection_skip, stat_lru_fallback, stat_bloom_insert;
  logic [7:0] mshr_occupancy, mshr_dead_slots;
  logic [6:0] protected_entries;
  logic [4:0] walkers_busy;
  logic bloom_cleared;
  int unsigned reads, cyc = 0;
  int checks = 0, failures = 0;

  depot_l2_subsystem #(.L2_ENTRIES(64), .L2_WAYS(16), .BLOOM_RESET(64)) dut (.*);
  dram_pt_model #(.LAT(254), .TAG_W(4)) mem (
    .clk, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_addr (mem_req_addr),
    .req_tag (mem_req_tag), .resp_valid (mem_resp_valid), .resp_tag (mem_resp_tag), .resp_data (mem_resp_data), .reads
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign cycle_now = timer_t'(cyc);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // ---------------- scoreboard ----------------
  bit          out_v   [1024];
  vpn_t        out_vpn [1024];
  int unsigned out_t   [1024];
  int outstanding = 0, issued = 0, answered = 0, min_hit_lat = 1 << 30;
  // mechanism counters
  int n_hit = 0, n_miss = 0, n_merge = 0, n_queued = 0, n_pwc_hit = 0, n_dead = 0, n_pds = 0;
  int n_protect = 0, n_clear = 0, n_flush = 0, n_backpressure = 0, peak_dead_slots = 0;

  always @(posedge clk) if (rst_n) begin
    if (resp_valid) begin
      logic [36:0] exp;
      answered++;
      check(out_v[resp_id] && out_vpn[resp_id] == resp_vpn, "response to an outstanding request");
      exp = pt_model_pkg::walk(resp_vpn, root);
      check(resp_ppn == (exp[36] ? '0 : exp[35:0]), "translation");
      if (!dut.mshr_resp_valid && (cyc - out_t[resp_id]) < min_hit_lat) min_hit_lat = cyc - out_t[resp_id];
      out_v[resp_id] = 0;
      outstanding--;
    end
    if (req_valid && req_ready) begin
      check(!out_v[req_id], "tag reuse");
      out_v[req_id] = 1; out_vpn[req_id] = req_vpn; out_t[req_id] = cyc;
      outstanding++; issued++;
    end
    if (dut.u_l2.res_valid && dut.u_l2.res_ready) begin
      if (dut.u_l2.res_hit) n_hit++; else n_miss++;
      if (!dut.u_l2.res_hit && !dut.miss_new_walk) n_merge++;
    end
    if (dut.miss_valid && !dut.miss_ready) n_backpressure++;
    if (dut.q_valid && !dut.q_ready) n_queued++;
    if (dut.u_gmmu.c_res_valid && dut.u_gmmu.c_res_depth != 0) n_pwc_hit++;
    if (dut.dead_event) n_dead++;
    if (dut.pds_insert) n_pds++;
    if (dut.set_protect) n_protect++;
    if (bloom_cleared) n_clear++;
    if (kernel_boundary) n_flush++;
    if (int'(mshr_dead_slots) > peak_dead_slots) peak_dead_slots = int'(mshr_dead_slots);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: issued=%0d answered=%0d", issued, answered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input vpn_t v);
    int id;
    id = issued % 1024;
    while (out_v[id]) @(negedge clk);
    req_valid = 1; req_vpn = v; req_id = req_id_t'(id);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  // pages: 4 sets; hot pages and streamed pages share upper-level tables
  function automatic vpn_t page(input int k);
    return {9'd7, 9'd1, 9'(k / 64), 9'(k % 64) * 9'd4 + 9'd1};
  endfunction

  initial begin
    foreach (out_v[i]) out_v[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // W = 4000 cycles
    csr_we = 1; csr_addr = 2'd0; csr_wdata = 32'd4000;
    @(negedge clk);
    csr_we = 0;
    check(dut.window == timer_t'(4000), "W written");
    // a single request: cold miss, then a hit with the bare 80-cycle lookup
    send(page(0));
    while (outstanding > 0) @(negedge clk);
    send(page(0));
    while (outstanding > 0) @(negedge clk);
    check(min_hit_lat == 80, $sformatf("hit latency %0d", min_hit_lat));
    // shared-page phase
    for (int r = 0; r < 60; r++) begin
      for (int b = 0; b < 12; b++) send(page($urandom_range(3)));          // burst to hot pages
      for (int s = 0; s < 12; s++) send(page(4 + ((r * 12 + s) % 80)));   // stream that evicts them
    end
    while (outstanding > 0) @(negedge clk);
    // kernel boundary
    kernel_boundary = 1;
    @(negedge clk);
    kernel_boundary = 0;
    check(protected_entries == 0, "kernel boundary clears protection");
    // capacity phase: cycle over 96 pages (64-entry TLB), 4 passes
    for (int p = 0; p < 4; p++)
      for (int k = 0; k < 96; k++) send(page(100 + k));
    while (outstanding > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    check(issued == answered && outstanding == 0, "every request answered once");
    check(stat_dead_entry_miss == 32'(n_dead), "dead-entry miss counter");
    $display("issued=%0d hit=%0d miss=%0d merge=%0d queued=%0d pwc_hit=%0d dead=%0d pds=%0d protect=%0d",
             issued, n_hit, n_miss, n_merge, n_queued, n_pwc_hit, n_dead, n_pds, n_protect);
    $display("skip=%0d fallback=%0d bloom_ins=%0d clears=%0d flush=%0d backpressure=%0d peak_dead_slots=%0d reads=%0d cycles=%0d",
             stat_protection_skip, stat_lru_fallback, stat_bloom_insert, n_clear, n_flush, n_backpressure, peak_dead_slots, reads, cyc);
    check(n_hit > 0, "hit happened");
    check(n_miss > 0, "miss happened");
    check(n_merge > 0, "MSHR merge happened");
    check(n_queued > 0, "walk queued behind busy walkers");
    check(n_pwc_hit > 0, "page-walk cache hit happened");
    check(n_dead > 0, "dead-entry miss detected");
    check(n_pds > 0, "PDS registration happened");
    check(n_protect > 0, "protected fill happened");
    check(stat_protection_skip > 0, "protection skip happened");
    check(stat_lru_fallback > 0, "plain-LRU fallback happened");
    check(n_clear > 0, "Bloom filter clear happened");
    check(n_flush > 0, "kernel-boundary flush happened");
    check(n_backpressure > 0, "MSHR back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
