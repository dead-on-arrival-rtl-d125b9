// tb_page_table_walker: one walker against the behavioural DRAM model
// (254-cycle reads) and a page-walk-cache stand-in that answers after 20
// cycles with a chosen depth. Checks the PPN and fault of every walk
// against the reference walk, the number of memory reads (4 - depth), the
// cache insertions offered, and that each skipped level saves exactly one
// memory round trip (254 cycles).
module tb_page_table_walker;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  ppn_t root = 36'h0_0123_4567;
  logic start_valid = 0, start_ready;
  vpn_t start_vpn = '0;
  logic pwc_req_valid, pwc_req_ready = 1, pwc_res_valid = 0;
  vpn_t pwc_req_vpn, pwc_ins_vpn, done_vpn;
  logic [1:0] pwc_res_depth = '0, pwc_ins_depth;
  ppn_t pwc_res_base = '0, pwc_ins_base, done_ppn;
  logic pwc_ins_valid, mem_req_valid, mem_req_ready, mem_resp_valid;
  pa_t mem_req_addr;
  logic [63:0] mem_resp_data;
  logic done_valid, done_ready = 1, done_fault, busy;
  logic [0:0] resp_tag;
  int unsigned reads;
  int checks = 0, failures = 0, n_fault = 0;
  int lat_by_depth [4];
  int ins_seen;

  page_table_walker dut (.*);
  dram_pt_model #(.LAT(254), .TAG_W(1)) mem (
    .clk, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_addr (mem_req_addr),
    .req_tag (1'b0), .resp_valid (mem_resp_valid), .resp_tag (resp_tag), .resp_data (mem_resp_data), .reads
  );
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic ppn_t base_after(input vpn_t v, input int d);
    ppn_t b;
    logic [63:0] e;
    b = root;
    for (int l = 0; l < d; l++) begin
      e = pt_model_pkg::pte_of({b, 12'd0} + {36'd0, v[35 - 9*l -: 9], 3'd0});
      b = e[47:12];
    end
    return b;
  endfunction

  // cache insertions must carry the right base
  always @(posedge clk) if (pwc_ins_valid) begin
    ins_seen++;
    check(pwc_ins_base == base_after(pwc_ins_vpn, int'(pwc_ins_depth)), $sformatf("ins base %h exp %h depth %0d", pwc_ins_base, base_after(pwc_ins_vpn, int'(pwc_ins_depth)), pwc_ins_depth));
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 120; n++) begin
      vpn_t v;
      int d, r0, lat;
      logic [36:0] exp;
      v = {$urandom, $urandom} & 36'hF_FFFF_FFFF;
      if (n % 10 == 9) v[17:9] = 9'h1FF;        // forces a fault at level 2
      d = n % 4;
      if (n % 10 == 9 && d == 3) d = 2;    // a cached level-2 entry would have been present
      exp = pt_model_pkg::walk(v, root);
      r0 = int'(reads);
      ins_seen = 0;
      start_valid = 1; start_vpn = v;
      @(negedge clk);
      start_valid = 0;
      lat = 1;
      fork
        begin
          wait (pwc_req_valid);
          @(negedge clk);
          repeat (19) @(negedge clk);
          pwc_res_valid = 1; pwc_res_depth = 2'(d); pwc_res_base = base_after(v, d);
          @(negedge clk);
          pwc_res_valid = 0;
        end
      join_none
      while (!done_valid && lat < 5000) begin @(negedge clk); lat++; end
      check(done_vpn == v, "done vpn");
      check(done_fault == exp[36], "fault");
      if (!exp[36]) begin
        check(done_ppn == exp[35:0], $sformatf("ppn %h exp %h d=%0d n=%0d", done_ppn, exp[35:0], d, n));
        check(int'(reads) - r0 == 4 - d, "memory reads = 4 - cached depth");
        check(ins_seen == 3 - d, "cache insertions offered");
        lat_by_depth[d] = lat;
      end else n_fault++;
      @(negedge clk);
    end
    check(n_fault > 0, "faults seen");
    for (int d = 1; d < 4; d++)
      check(lat_by_depth[0] - lat_by_depth[d] == 254 * d, $sformatf("latency saving depth %0d: %0d", d, lat_by_depth[0] - lat_by_depth[d]));
    $display("walk latency with no cached level: %0d cycles", lat_by_depth[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
