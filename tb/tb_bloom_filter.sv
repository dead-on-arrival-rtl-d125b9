// tb_bloom_filter: checks the eviction-history filter against a reference
// bit vector computed with independently written hash arithmetic: no false
// negatives, exact agreement on every query, the clear after 1024
// insertions, and the saturate override.
module tb_bloom_filter;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, saturate = 0;
  vpn_t ins_vpn = '0, qry_vpn = '0;
  logic qry_hit, cleared;
  logic [10:0] ins_count;
  int checks = 0, failures = 0;
  bit ref_bits [8192];
  vpn_t inserted [$];

  bloom_filter dut (.*);

  always #5 clk = ~clk;

  function automatic int idx(input vpn_t v, input logic [27:0] k);
    logic [63:0] p;
    p = 64'(v) * 64'(k);
    return int'(p[47:35]);
  endfunction
  function automatic bit ref_hit(input vpn_t v);
    return ref_bits[idx(v, 28'h9E3779B)] && ref_bits[idx(v, 28'h85EBCA7)] && ref_bits[idx(v, 28'hC2B2AE3)];
  endfunction
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int clears = 0;
    foreach (ref_bits[i]) ref_bits[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 2100; n++) begin
      vpn_t v;
      v = {$urandom, $urandom} & 36'hF_FFFF_FFFF;
      // query a random VPN and an already inserted one
      qry_vpn = v;
      #1 check(qry_hit == ref_hit(v), "random query");
      if (inserted.size() > 0) begin
        qry_vpn = inserted[$urandom_range(inserted.size()-1)];
        #1 check(qry_hit == 1'b1, "no false negative");
      end
      // insert v
      ins_vpn = v; ins_valid = 1;
      #1 check(cleared == ((n % 1024) == 1023), "clear pulse position");
      @(negedge clk);
      ins_valid = 0;
      if ((n % 1024) == 1023) begin
        foreach (ref_bits[i]) ref_bits[i] = 0;
        inserted.delete();
        clears++;
        qry_vpn = v;
        #1 check(qry_hit == ref_hit(v), "query after clear");
        check(ins_count == 0, "count restarts");
      end else begin
        ref_bits[idx(v, 28'h9E3779B)] = 1;
        ref_bits[idx(v, 28'h85EBCA7)] = 1;
        ref_bits[idx(v, 28'hC2B2AE3)] = 1;
        inserted.push_back(v);
        check(ins_count == 11'((n % 1024) + 1), "insert count");
      end
    end
    check(clears == 2, "two clears");
    saturate = 1;
    qry_vpn = 36'h123456789;
    #1 check(qry_hit == 1'b1, "saturated filter always hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
