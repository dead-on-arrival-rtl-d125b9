// tb_depot_l2_subsystem_full: the L2 translation level with DEPOT at its
// default sizes (1024-entry 16-way L2 TLB, 80-cycle lookup, 128x8 MSHR, 16
// walkers, 32-entry page-walk cache, 8192-bit filter cleared every 1024
// insertions, 16-slot PDS, W = 500000 cycles).
//
// It streams two passes over 1280 distinct pages (20 per set, more than
// the 16 ways), so the first pass fills the TLB and starts evicting, and
// the second pass re-walks pages that were evicted: dead-entry misses,
// which DEPOT detects and protects. Every answer is checked against the
// reference page-table walk; the run checks that the first access is a
// miss, that a repeat access hits after 80 cycles, that dead-entry misses
// and protected fills occur and that every request is answered.
module tb_depot_l2_subsystem_full;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, resp_valid;
  vpn_t req_vpn = '0, resp_vpn;
  req_id_t req_id = '0, resp_id;
  ppn_t resp_ppn;
  ppn_t root = 36'h0_0013_5791;
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
  logic [10:0] protected_entries;
  logic [4:0] walkers_busy;
  logic bloom_cleared;
  int unsigned reads, cyc = 0;
  int checks = 0, failures = 0;

  depot_l2_subsystem dut (.*);
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

  bit          out_v   [1024];
  vpn_t        out_vpn [1024];
  int unsigned out_t   [1024];
  int outstanding = 0, issued = 0, answered = 0, last_lat = 0, n_hit = 0, n_miss = 0;

  always @(posedge clk) if (rst_n) begin
    if (resp_valid) begin
      logic [36:0] exp;
      answered++;
      check(out_v[resp_id] && out_vpn[resp_id] == resp_vpn, "response to an outstanding request");
      exp = pt_model_pkg::walk(resp_vpn, root);
      check(resp_ppn == (exp[36] ? '0 : exp[35:0]), "translation");
      last_lat = cyc - out_t[resp_id];
      out_v[resp_id] = 0;
      outstanding--;
    end
    if (req_valid && req_ready) begin
      out_v[req_id] = 1; out_vpn[req_id] = req_vpn; out_t[req_id] = cyc;
      outstanding++; issued++;
    end
    if (dut.u_l2.res_valid && dut.u_l2.res_ready) begin
      if (dut.u_l2.res_hit) n_hit++; else n_miss++;
    end
  end

  initial begin
    repeat (600000) @(posedge clk);
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

  function automatic vpn_t page(input int k);
    return {9'd5, 9'd2, 9'(k / 256), 9'(k % 256)};
  endfunction

  initial begin
    foreach (out_v[i]) out_v[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(dut.window == timer_t'(500000), "default W");
    send(page(0));
    while (outstanding > 0) @(negedge clk);
    check(n_miss == 1 && n_hit == 0, "first access misses");
    send(page(0));
    while (outstanding > 0) @(negedge clk);
    check(n_hit == 1 && last_lat == 80, $sformatf("repeat access hits after 80 cycles (%0d)", last_lat));
    for (int p = 0; p < 2; p++)
      for (int k = 0; k < 1280; k++) send(page(k));
    while (outstanding > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("issued=%0d hit=%0d miss=%0d dead=%0d skip=%0d fallback=%0d bloom_ins=%0d protected=%0d reads=%0d cycles=%0d",
             issued, n_hit, n_miss, stat_dead_entry_miss, stat_protection_skip, stat_lru_fallback,
             stat_bloom_insert, protected_entries, reads, cyc);
    check(issued == answered && outstanding == 0, "every request answered once");
    check(stat_bloom_insert > 0, "evictions recorded in the filter");
    check(stat_dead_entry_miss > 0, "dead-entry misses detected");
    check(protected_entries > 0, "re-installed entries protected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
