// tb_gmmu_ptw_pool: the 16-walker GMMU against the behavioural DRAM model.
// Feeds 200 VPNs (sharing upper-level prefixes) through the queue side,
// with random back-pressure on completions. Checks that every VPN comes
// back exactly once with the reference translation, that all 16 walkers
// were busy at once (later walks queued), and that the page-walk cache
// saved memory reads.
module tb_gmmu_ptw_pool;
  import depot_pkg::*;
  localparam int N = 200;
  logic clk = 0, rst_n = 0;
  ppn_t root = 36'h0_00AB_CDEF;
  logic q_valid = 0, q_ready;
  vpn_t q_vpn = '0;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  pa_t mem_req_addr;
  logic [3:0] mem_req_tag, mem_resp_tag;
  logic [63:0] mem_resp_data;
  logic fill_valid, fill_ready = 0, fill_fault;
  vpn_t fill_vpn;
  ppn_t fill_ppn;
  logic [4:0] busy_count;
  int unsigned reads;
  int checks = 0, failures = 0, max_busy = 0, got = 0;
  vpn_t vpns [N];
  bit done [N];

  gmmu_ptw_pool dut (.*);
  dram_pt_model #(.LAT(254), .TAG_W(4)) mem (
    .clk, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_addr (mem_req_addr),
    .req_tag (mem_req_tag), .resp_valid (mem_resp_valid), .resp_tag (mem_resp_tag), .resp_data (mem_resp_data), .reads
  );
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (int'(busy_count) > max_busy) max_busy = int'(busy_count);
    if (fill_valid && fill_ready) begin
      int k;
      logic [36:0] exp;
      k = -1;
      for (int i = 0; i < N; i++) if (vpns[i] == fill_vpn && !done[i]) k = i;
      check(k >= 0, "fill of an outstanding VPN");
      if (k >= 0) begin
        done[k] = 1;
        got++;
        exp = pt_model_pkg::walk(fill_vpn, root);
        check(fill_fault == exp[36] && (exp[36] || fill_ppn == exp[35:0]), "translation");
      end
    end
  end
  always @(negedge clk) fill_ready <= ($urandom_range(3) != 0);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog got=%0d", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      vpns[i] = {9'd3, 9'($urandom_range(2)), 9'($urandom_range(5)), 9'(i)};
      done[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      q_valid = 1; q_vpn = vpns[i];
      @(posedge clk);
      while (!q_ready) @(posedge clk);
      @(negedge clk);
    end
    q_valid = 0;
    while (got < N) @(negedge clk);
    repeat (10) @(negedge clk);
    check(got == N, "all walks completed");
    check(max_busy == 16, "16 walkers busy at once");
    check(reads < 4 * N, "page-walk cache saved reads");
    $display("reads=%0d for %0d walks, max busy=%0d", reads, N, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
