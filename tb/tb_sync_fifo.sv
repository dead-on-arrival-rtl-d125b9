// tb_sync_fifo: the FIFO at its default size (72-bit words, 16 deep)
// against a queue model. Random pushes and pops, with phases that favour
// pushing (to reach full) and popping (to reach empty); every cycle checks
// push_ready, pop_valid and the head word.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_ready, pop_valid, pop_ready = 0;
  logic [71:0] push_data = '0, pop_data;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0, n_both = 0;
  logic [71:0] model [$];

  sync_fifo dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      int bias;
      @(negedge clk);
      bias = ((k / 500) % 2 == 0) ? 3 : 1;
      push_valid = $urandom_range(0, 3) < bias;
      pop_ready  = $urandom_range(0, 3) >= bias;
      push_data  = {8'($urandom), $urandom, $urandom};
      #1;
      check(push_ready == (model.size() < 16), "push_ready");
      check(pop_valid == (model.size() > 0), "pop_valid");
      if (model.size() > 0) check(pop_data == model[0], "head word");
      if (model.size() == 16) n_full++;
      if (model.size() == 0) n_empty++;
      if (push_valid && push_ready && pop_valid && pop_ready) n_both++;
      if (pop_valid && pop_ready) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_data);
    end
    $display("full=%0d empty=%0d both=%0d", n_full, n_empty, n_both);
    check(n_full > 0 && n_empty > 0 && n_both > 0, "full, empty and simultaneous push/pop seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
