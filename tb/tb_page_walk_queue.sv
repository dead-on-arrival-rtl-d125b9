// tb_page_walk_queue: random pushes and pops against a reference queue,
// including the full and empty conditions (depth 8 instance).
module tb_page_walk_queue;
  import depot_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_ready, pop_valid, pop_ready = 0;
  vpn_t push_vpn = '0, pop_vpn;
  logic [3:0] count;
  vpn_t model [$];
  int checks = 0, failures = 0, n_full = 0;

  page_walk_queue #(.DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

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
    for (int n = 0; n < 5000; n++) begin
      bit dp, dq;
      push_valid = ($urandom_range(9) < ((n / 500) % 2 ? 7 : 3));
      push_vpn   = {$urandom, 4'h0};
      pop_ready  = $urandom_range(1);
      #1;
      check(push_ready == (model.size() < 8), "push_ready");
      check(pop_valid == (model.size() > 0), "pop_valid");
      check(count == 4'(model.size()), "count");
      if (model.size() > 0) check(pop_vpn == model[0], "head");
      if (model.size() == 8) n_full++;
      dp = push_valid && model.size() < 8;
      dq = pop_ready && model.size() > 0;
      @(negedge clk);
      if (dq) void'(model.pop_front());
      if (dp) model.push_back(push_vpn);
    end
    check(n_full > 0, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
