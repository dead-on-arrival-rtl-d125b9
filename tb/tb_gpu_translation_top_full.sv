// tb_gpu_translation_top_full: the GPU translation hierarchy at its default
// sizes, no parameter overridden: 46 SMs, each with a 32-entry fully
// associative L1 TLB (20-cycle lookup) and a 16x4 L1 MSHR; a 1024-entry
// 16-way L2 TLB (80-cycle lookup) with DEPOT (8192-bit filter cleared every
// 1024 insertions, 16-slot PDS, W = 500000 cycles); 128x8 L2 MSHR; 16
// walkers; 32-entry page-walk cache; 254-cycle page-table memory.
//
// The SMs together sweep 1472 shared pages twice (23 pages per L2 set, more
// than the 16 ways), each SM repeating some of its pages (at once, or
// after the first answer), with a
// kernel boundary half-way; in the second sweep each SM takes its
// neighbour's pages, so they miss in its L1 TLB. The second sweep re-walks evicted pages, which
// DEPOT detects and protects. Every answer is checked against the
// reference walk and matched to an outstanding request; the test checks
// the 20-cycle L1 hit latency, L1 hits and merges, L2 misses, dead-entry
// misses, filter insertions and protected fills, and that every request
// is answered.
module tb_gpu_translation_top_full;
  import depot_pkg::*;
  localparam int NSM = 46;
  localparam int NREQ = 64;
  localparam int NTAG = 48;

  logic clk = 0, rst_n = 0;
  logic    sm_req_valid [NSM];
  logic    sm_req_ready [NSM];
  vpn_t    sm_req_vpn   [NSM];
  req_id_t sm_req_id    [NSM];
  logic    sm_resp_valid [NSM];
  req_id_t sm_resp_id    [NSM];
  vpn_t    sm_resp_vpn   [NSM];
  ppn_t    sm_resp_ppn   [NSM];
  ppn_t root = 36'h0_0024_6801;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  pa_t mem_req_addr;
  logic [3:0] mem_req_tag, mem_resp_tag;
  logic [63:0] mem_resp_data;
  timer_t cycle_now;
  logic kernel_boundary = 0, bloom_saturate = 0, csr_we = 0, stats_clear = 0;
  logic [1:0] csr_addr = '0;
  logic [31:0] csr_wdata = '0;
  logic [31:0] stat_l1_hits, stat_l1_misses, stat_l2_requests;
  logic [31:0] stat_dead_entry_miss, stat_protection_skip, stat_lru_fallback, stat_bloom_insert;
  logic [7:0] mshr_occupancy, mshr_dead_slots;
  logic [10:0] protected_entries;
  logic [4:0] walkers_busy;
  logic bloom_cleared;
  int unsigned reads, cyc = 0;
  int checks = 0, failures = 0;

  gpu_translation_top dut (.*);
  dram_pt_model #(.LAT(254), .TAG_W(4)) mem (
    .clk, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_addr (mem_req_addr),
    .req_tag (mem_req_tag), .resp_valid (mem_resp_valid), .resp_tag (mem_resp_tag),
    .resp_data (mem_resp_data), .reads
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign cycle_now = timer_t'(cyc);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // scoreboard, per SM and tag
  bit          busy    [NSM][NTAG];
  bit          out_v   [NSM][NTAG];
  vpn_t        out_vpn [NSM][NTAG];
  int unsigned out_t   [NSM][NTAG];
  bit          fired   [NSM];
  int issued = 0, answered = 0, min_lat = 1 << 30, backpressure = 0, contended = 0;
  int n_l2_hit = 0, n_l2_miss = 0, n_l2_merge = 0, n_pwc_hit = 0, n_pds = 0, n_protect = 0;
  int n_clear = 0, n_flush = 0, done_sm = 0;
  int grants [NSM];

  // everything is sampled mid-cycle, after the falling-edge stimulus has
  // settled; what is seen here is what transfers at the next rising edge
  always @(negedge clk) if (rst_n) begin
    int nv;
    #1;
    nv = 0;
    for (int s = 0; s < NSM; s++) begin
      if (sm_resp_valid[s]) begin
        int id;
        logic [36:0] exp;
        id = int'(sm_resp_id[s]);
        answered++;
        check(id < NTAG && out_v[s][id] && out_vpn[s][id] == sm_resp_vpn[s], "answer matches an outstanding request");
        exp = pt_model_pkg::walk(sm_resp_vpn[s], root);
        check(sm_resp_ppn[s] == (exp[36] ? '0 : exp[35:0]), "translation");
        if (id < NTAG) begin
          if (cyc + 1 - out_t[s][id] < min_lat) min_lat = cyc + 1 - out_t[s][id];
          out_v[s][id] = 0; busy[s][id] = 0;
        end
      end
      if (sm_req_valid[s]) begin
        if (sm_req_ready[s]) begin
          int id;
          id = int'(sm_req_id[s]);
          out_v[s][id] = 1; out_vpn[s][id] = sm_req_vpn[s]; out_t[s][id] = cyc + 1;
          fired[s] = 1; issued++;
        end else backpressure++;
      end
      if (dut.l2q_valid[s]) nv++;
      if (dut.l2q_ready[s]) grants[s]++;
    end
    if (nv > 1) contended++;
    if (dut.u_l2.l2_res_valid && dut.u_l2.l2_res_ready) begin
      if (dut.u_l2.l2_res_hit) n_l2_hit++; else n_l2_miss++;
      if (!dut.u_l2.l2_res_hit && !dut.u_l2.miss_new_walk) n_l2_merge++;
    end
    if (dut.u_l2.u_gmmu.c_res_valid && dut.u_l2.u_gmmu.c_res_depth != 0) n_pwc_hit++;
    if (dut.u_l2.pds_insert) n_pds++;
    if (dut.u_l2.set_protect) n_protect++;
    if (bloom_cleared) n_clear++;
  end


  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: issued=%0d answered=%0d", issued, answered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vpn_t page(input int k);
    return {9'd5, 9'd2, 9'(k / 256), 9'(k % 256)};
  endfunction

  task automatic drive(input int s);
    for (int n = 0; n < NREQ; n++) begin
      int reps, prev;
      bit late;
      reps = ($urandom_range(0, 3) == 0) ? 2 : 1;
      late = ($urandom_range(0, 1) == 0);
      prev = 0;
      for (int r = 0; r < reps; r++) begin
        int id, free;
        @(negedge clk);
        if (r > 0 && late) while (busy[s][prev]) @(negedge clk);
        do begin
          free = 0;
          for (int t = 0; t < NTAG; t++) if (!busy[s][t]) free++;
          if (free == 0) @(negedge clk);
        end while (free == 0);
        do id = $urandom_range(0, NTAG - 1); while (busy[s][id]);
        busy[s][id] = 1;
        prev = id;
        fired[s] = 0;
        sm_req_valid[s] = 1; sm_req_vpn[s] = page((n * NSM + ((n < NREQ / 2) ? s : (s + 1) % NSM)) % 1472); sm_req_id[s] = req_id_t'(id);
        do @(negedge clk); while (!fired[s]);
        sm_req_valid[s] = 0;
      end
    end
    done_sm++;
  endtask

  initial begin
    for (int s = 0; s < NSM; s++) begin
      sm_req_valid[s] = 0; sm_req_vpn[s] = '0; sm_req_id[s] = '0; fired[s] = 0; grants[s] = 0;
      for (int t = 0; t < NTAG; t++) begin busy[s][t] = 0; out_v[s][t] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(dut.u_l2.window == timer_t'(500000), "default W");
    for (int s = 0; s < NSM; s++)
      fork
        automatic int sm = s;
        drive(sm);
      join_none
    // one kernel boundary half-way
    while (issued < NSM * NREQ / 2) @(negedge clk);
    kernel_boundary = 1; n_flush++;
    @(negedge clk);
    kernel_boundary = 0;
    while (done_sm < NSM) @(negedge clk);
    while (answered < issued) @(negedge clk);
    repeat (10) @(negedge clk);
    $display("issued=%0d answered=%0d l1_hit=%0d l1_miss=%0d l1_merge=%0d l2_req=%0d l2_hit=%0d l2_miss=%0d l2_merge=%0d pwc_hit=%0d",
             issued, answered, stat_l1_hits, stat_l1_misses, stat_l1_misses - stat_l2_requests,
             stat_l2_requests, n_l2_hit, n_l2_miss, n_l2_merge, n_pwc_hit);
    $display("dead=%0d pds=%0d protect=%0d skip=%0d fallback=%0d clears=%0d flush=%0d backpressure=%0d contended=%0d min_lat=%0d cycles=%0d",
             stat_dead_entry_miss, n_pds, n_protect, stat_protection_skip, stat_lru_fallback,
             n_clear, n_flush, backpressure, contended, min_lat, cyc);
    check(answered == issued && issued >= NSM * NREQ, "every request answered once");
    check(min_lat == 20, $sformatf("shortest latency is the 20-cycle L1 hit (%0d)", min_lat));
    check(stat_l1_hits > 0, "L1 hit happened");
    check(stat_l1_misses > stat_l2_requests, "L1 MSHR merge happened");
    check(n_l2_miss > 0, "L2 miss happened");
    check(stat_bloom_insert > 0, "evictions recorded in the filter");
    check(stat_dead_entry_miss > 0, "dead-entry misses detected");
    check(n_protect > 0, "re-installed entries protected");
    check(n_flush == 1, "kernel flush happened");
    check(contended > 0, "arbitration between SMs happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
