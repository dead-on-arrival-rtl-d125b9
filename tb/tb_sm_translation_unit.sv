// tb_sm_translation_unit: one SM's translation unit at its default sizes
// (32-entry L1 TLB, 20-cycle lookup, 16x4 L1 MSHR) with a model of the L2
// level behind it: L2 requests are accepted with random back-pressure and
// answered after 30 to 300 cycles, in any order, with the reference
// 4-level walk (PPN 0 when the page is not mapped).
//
// Warp requests come from up to 48 tags over a pool of 64 pages (some of
// them unmapped), with immediate and delayed repeats, and occasional
// flushes. Every answer is matched to an outstanding tag and checked
// against the reference walk. The test checks that every request is
// answered, that the L2 model never sees two requests for one VPN in
// flight (the MSHR merges them), that the incoming FIFO never overflows,
// and that L1 hits (20 cycles), misses, merges, flushes and unmapped pages
// all occurred.
module tb_sm_translation_unit;
  import depot_pkg::*;
  localparam int NTAG = 48;
  logic clk = 0, rst_n = 0, flush = 0;
  logic req_valid = 0, req_ready, resp_valid;
  vpn_t req_vpn = '0, resp_vpn;
  req_id_t req_id = '0, resp_id;
  ppn_t resp_ppn;
  logic l2_req_valid, l2_req_ready = 0, l2_resp_valid = 0;
  vpn_t l2_req_vpn, l2_resp_vpn = '0;
  ppn_t l2_resp_ppn = '0;
  logic l1_hit_event, l1_miss_event;
  logic [4:0] mshr_occupancy;
  ppn_t root = 36'h0_0035_7913;
  int checks = 0, failures = 0, cyc = 0;

  sm_translation_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  function automatic ppn_t expect_ppn(input vpn_t v);
    logic [36:0] e;
    e = pt_model_pkg::walk(v, root);
    return e[36] ? '0 : e[35:0];
  endfunction

  bit   out_v [NTAG];
  vpn_t out_vpn [NTAG];
  int   out_t [NTAG];
  // L2 model: in-flight VPNs and their answer times
  vpn_t l2_vpn [$];
  int   l2_due [$];
  int issued = 0, answered = 0, min_lat = 1 << 30, n_hit = 0, n_miss = 0, n_l2 = 0, n_fault = 0, n_flush = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // L2 model and monitor: decide at the falling edge, sample after it
  always @(negedge clk) if (rst_n) begin
    int pick;
    l2_req_ready = $urandom_range(0, 3) != 0;
    l2_resp_valid = 0;
    pick = -1;
    foreach (l2_due[i]) if (pick < 0 && l2_due[i] <= cyc) pick = i;
    if (pick >= 0) begin
      l2_resp_valid = 1; l2_resp_vpn = l2_vpn[pick]; l2_resp_ppn = expect_ppn(l2_vpn[pick]);
      l2_vpn.delete(pick); l2_due.delete(pick);
    end
    #1;
    if (l2_req_valid && l2_req_ready) begin
      foreach (l2_vpn[i]) check(l2_vpn[i] != l2_req_vpn, "one L2 request per VPN in flight");
      l2_vpn.push_back(l2_req_vpn); l2_due.push_back(cyc + $urandom_range(30, 300));
      n_l2++;
    end
    if (l2_resp_valid) check(dut.in_push_ready, "incoming FIFO has room");
    if (resp_valid) begin
      int id;
      id = int'(resp_id);
      answered++;
      check(id < NTAG && out_v[id] && out_vpn[id] == resp_vpn, "answer matches an outstanding request");
      check(resp_ppn == expect_ppn(resp_vpn), "translation");
      if (resp_ppn == '0) n_fault++;
      if (id < NTAG) begin
        if (cyc + 1 - out_t[id] < min_lat) min_lat = cyc + 1 - out_t[id];
        out_v[id] = 0;
      end
    end
    if (l1_hit_event) n_hit++;
    if (l1_miss_event) n_miss++;
  end

  initial begin
    vpn_t last;
    last = '0;
    foreach (out_v[i]) out_v[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int id, free;
      vpn_t v;
      @(negedge clk);
      do begin
        free = 0;
        foreach (out_v[t]) if (!out_v[t]) free++;
        if (free == 0) @(negedge clk);
      end while (free == 0);
      do id = $urandom_range(0, NTAG - 1); while (out_v[id]);
      if (n > 0 && $urandom_range(0, 4) == 0) v = last;
      else if ($urandom_range(0, 19) == 0) v = {9'd1, 9'd2, 9'd3, 9'd511};   // unmapped
      else v = {9'd1, 9'd2, 9'($urandom_range(0, 1)), 9'($urandom_range(0, 31))};
      last = v;
      flush = ($urandom_range(0, 499) == 0);
      if (flush) n_flush++;
      req_valid = 1; req_vpn = v; req_id = req_id_t'(id);
      #1;
      while (!req_ready) begin
        @(negedge clk);
        flush = 0;
        #1;
      end
      out_v[id] = 1; out_vpn[id] = v; out_t[id] = cyc + 1; issued++;
      @(negedge clk);
      flush = 0;
      req_valid = 0;
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 60)) @(negedge clk);
    end
    while (answered < issued) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("issued=%0d answered=%0d hit=%0d miss=%0d l2=%0d merge=%0d fault=%0d flush=%0d min_lat=%0d",
             issued, answered, n_hit, n_miss, n_l2, n_miss - n_l2, n_fault, n_flush, min_lat);
    check(answered == issued, "every request answered");
    check(min_lat == 20, "20-cycle L1 hit");
    check(n_hit > 0 && n_miss > n_l2 && n_fault > 0 && n_flush > 0, "hits, merges, unmapped pages and flushes seen");
    check(mshr_occupancy == 0, "MSHR empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
