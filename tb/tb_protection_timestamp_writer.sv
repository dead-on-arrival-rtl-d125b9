// tb_protection_timestamp_writer: random fills; protection only for an
// enabled, flagged fill, and expiry = now + W modulo 2^20.
module tb_protection_timestamp_writer;
  import depot_pkg::*;
  logic fill_valid, is_dead_entry, enable, set_protect;
  timer_t now, window, protect_until;
  int checks = 0, failures = 0;

  protection_timestamp_writer dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int unsigned exp_until;
      fill_valid    = $urandom_range(1);
      is_dead_entry = $urandom_range(1);
      enable        = ($urandom_range(3) != 0);
      now           = timer_t'($urandom);
      window        = (n == 0) ? timer_t'(500000) : timer_t'($urandom_range(524287));
      #1;
      exp_until = (int'(now) + int'(window)) % (1 << 20);
      checks++;
      if (set_protect !== (fill_valid & is_dead_entry & enable)) begin failures++; $display("FAIL set"); end
      checks++;
      if (protect_until !== timer_t'(exp_until)) begin failures++; $display("FAIL until %0d %0d", protect_until, exp_until); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
