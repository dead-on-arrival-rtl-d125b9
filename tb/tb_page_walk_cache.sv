// tb_page_walk_cache: inserts upper-level entries and looks up VPNs;
// checks the 20-cycle latency, the returned tag, that the deepest matching
// entry wins, duplicate suppression and round-robin replacement.
module tb_page_walk_cache;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, res_valid, ins_valid = 0, ins_done;
  vpn_t lk_vpn = '0, ins_vpn = '0;
  logic [3:0] lk_tag = '0, res_tag;
  logic [1:0] res_depth, ins_depth = '0;
  ppn_t res_base, ins_base = '0;
  int checks = 0, failures = 0;

  typedef struct { int depth; logic [26:0] pfx; ppn_t base; } ent_t;
  ent_t model [$];   // insertion order; oldest replaced first

  page_walk_cache dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic logic [26:0] pfx(input vpn_t v, input int d);
    return (d == 1) ? {v[35:27], 18'd0} : (d == 2) ? {v[35:18], 9'd0} : v[35:9];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_deep = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 1500; n++) begin
      vpn_t v;
      // VPNs from a small space so prefixes collide
      v = {3'($urandom_range(3)), 6'd0, 3'($urandom_range(3)), 6'd0, 3'($urandom_range(3)), 6'd0, 9'($urandom)};
      if ($urandom_range(1)) begin
        int d;
        bit present;
        d = $urandom_range(3, 1);
        ins_valid = 1; ins_vpn = v; ins_depth = 2'(d); ins_base = {$urandom, 4'h3};
        present = 0;
        foreach (model[i]) if (model[i].depth == d && model[i].pfx == pfx(v, d)) present = 1;
        #1 check(ins_done == !present, "insert accepted unless present");
        @(negedge clk);
        ins_valid = 0;
        if (!present) begin
          ent_t e;
          e.depth = d; e.pfx = pfx(v, d); e.base = ins_base;
          if (model.size() == 32) void'(model.pop_front());
          model.push_back(e);
        end
      end else begin
        int lat, bd;
        ppn_t bb;
        lk_valid = 1; lk_vpn = v; lk_tag = 4'($urandom);
        bd = 0; bb = '0;
        foreach (model[i]) if (model[i].depth > bd && model[i].pfx == pfx(v, model[i].depth)) begin
          bd = model[i].depth; bb = model[i].base;
        end
        @(negedge clk);
        lk_valid = 0;
        lat = 1;
        while (!res_valid && lat < 100) begin @(negedge clk); lat++; end
        check(lat == 20, "lookup latency 20");
        check(res_tag == lk_tag, "tag");
        check(int'(res_depth) == bd && (bd == 0 || res_base == bb), "deepest match");
        if (bd == 3) n_deep++;
      end
    end
    check(n_deep > 0, "depth-3 hits seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
