// tb_l1_tlb_mshr: the L1 MSHR at its default size (16 entries, 4-way
// merge). Random misses over a pool of 24 VPNs and random fills of
// in-flight VPNs run against a reference of entries and their requester
// lists. Checks merge vs. allocate, request launches towards the L2,
// back-pressure at 4 merged requesters, at a full MSHR and when the L2
// request path is not ready, the release order and content of every
// response, and occupancy.
module tb_l1_tlb_mshr;
  import depot_pkg::*;
  localparam int E = 16, M = 4;
  logic clk = 0, rst_n = 0;
  logic miss_valid = 0, miss_ready;
  vpn_t miss_vpn = '0, walk_vpn, fill_vpn = '0, resp_vpn;
  req_id_t miss_id = '0, resp_id;
  logic walk_valid, walk_ready = 1, fill_valid = 0, fill_ready, resp_valid;
  ppn_t fill_ppn = '0, resp_ppn;
  logic [4:0] occupancy;
  int checks = 0, failures = 0;
  int n_merge = 0, n_alloc = 0, n_mergefull = 0, n_full = 0, n_resp = 0, n_busy = 0;

  typedef struct { vpn_t vpn; req_id_t ids [$]; } ent_t;
  ent_t ents [$];
  req_id_t exp_ids [$];
  vpn_t exp_vpn;
  ppn_t exp_ppn;

  l1_tlb_mshr dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // responses are checked as they appear
  always @(negedge clk) if (rst_n && resp_valid) begin
    n_resp++;
    check(exp_ids.size() > 0, "unexpected response");
    if (exp_ids.size() > 0) begin
      check(resp_id == exp_ids[0] && resp_vpn == exp_vpn && resp_ppn == exp_ppn, $sformatf("resp %0d %0d exp %0d %0d", resp_id, resp_vpn, exp_ids[0], exp_vpn));
      void'(exp_ids.pop_front());
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      int ei, nd;
      vpn_t v;
      if ($urandom_range(3) != 0 || ents.size() == 0) begin
        // miss
        v = 36'($urandom_range(23));
        miss_valid = 1; miss_vpn = v; miss_id = req_id_t'(nid);
        walk_ready = ($urandom_range(7) != 0);
        #1;
        ei = -1;
        foreach (ents[i]) if (ents[i].vpn == v) ei = i;
        if (ei >= 0) begin
          check(miss_ready == (ents[ei].ids.size() < M), "merge ready");
          check(walk_valid == 0, "no walk on merge");
          if (ents[ei].ids.size() >= M) n_mergefull++;
          else begin ents[ei].ids.push_back(req_id_t'(nid)); n_merge++; nid = (nid + 1) % 1024; end
        end else begin
          check(miss_ready == (ents.size() < E && walk_ready), "alloc ready");
          check(walk_valid == (ents.size() < E && walk_ready) && walk_vpn == v, "walk launch");
          if (ents.size() >= E) n_full++;
          else if (!walk_ready) n_busy++;
          else begin
            ent_t e;
            e.vpn = v; e.ids = {req_id_t'(nid)};
            ents.push_back(e); n_alloc++; nid = (nid + 1) % 1024;
          end
        end
        @(negedge clk);
        miss_valid = 0;
      end else begin
        // fill an in-flight VPN, then wait for the release to finish
        ei = $urandom_range(ents.size()-1);
        fill_valid = 1; fill_vpn = ents[ei].vpn; fill_ppn = {$urandom, 4'h5};
        #1;
        check(fill_ready == 1, "fill ready when idle");
        exp_ids = ents[ei].ids; exp_vpn = ents[ei].vpn; exp_ppn = fill_ppn;
        nd = exp_ids.size();
        ents.delete(ei);
        @(negedge clk);
        fill_valid = 0;
        check(fill_ready == 0, "fill refused while draining");
        repeat (nd) @(negedge clk);
        check(exp_ids.size() == 0, "all merged requesters released");
      end
      begin
        check(occupancy == 5'(ents.size()), "occupancy");
      end
    end
    check(n_merge > 0 && n_alloc > 0 && n_mergefull > 0 && n_full > 0 && n_busy > 0, "all cases seen");
    $display("merge=%0d alloc=%0d mergefull=%0d full=%0d busy=%0d resp=%0d", n_merge, n_alloc, n_mergefull, n_full, n_busy, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
