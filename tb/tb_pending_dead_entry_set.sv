// tb_pending_dead_entry_set: fills the 16 slots, checks drop-on-full,
// duplicate suppression, query, erase and flush against a reference list.
module tb_pending_dead_entry_set;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, erase = 0, flush = 0;
  vpn_t ins_vpn = '0, qry_vpn = '0;
  logic qry_hit, full;
  logic [4:0] occupancy;
  int checks = 0, failures = 0;
  vpn_t model [$];

  pending_dead_entry_set dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic bit in_model(input vpn_t v);
    foreach (model[i]) if (model[i] == v) return 1;
    return 0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      vpn_t v, q;
      int op;
      op = $urandom_range(9);
      v  = 36'($urandom_range(40));
      q  = 36'($urandom_range(40));
      ins_valid = (op < 6);
      ins_vpn   = v;
      qry_vpn   = q;
      erase     = (op >= 6 && op < 9);
      flush     = (op == 9) && ($urandom_range(20) == 0);
      #1;
      check(qry_hit == in_model(q), "query");
      check(full == (model.size() == 16), "full flag");
      check(occupancy == 5'(model.size()), "occupancy");
      @(negedge clk);
      if (flush) model.delete();
      else begin
        bit was_full, was_in;
        was_full = (model.size() == 16);
        was_in   = in_model(v);
        if (erase) foreach (model[i]) if (model[i] == q) begin model.delete(i); break; end
        if (ins_valid && !was_in && !was_full) model.push_back(v);
      end
      ins_valid = 0; erase = 0; flush = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
