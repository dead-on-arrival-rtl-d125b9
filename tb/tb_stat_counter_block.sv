// tb_stat_counter_block: random event pulses against reference counts,
// clear, and saturation on a 4-bit instance.
module tb_stat_counter_block;
  logic clk = 0, rst_n = 0, clear = 0;
  logic dead_entry_miss = 0, protection_skip = 0, lru_fallback = 0, bloom_insert = 0;
  logic [31:0] c0, c1, c2, c3;
  logic [3:0] s0, s1, s2, s3;
  int checks = 0, failures = 0;
  int r0 = 0, r1 = 0, r2 = 0, r3 = 0;

  stat_counter_block dut (.clk, .rst_n, .clear, .dead_entry_miss, .protection_skip, .lru_fallback, .bloom_insert,
    .dead_entry_miss_count (c0), .protection_skip_count (c1), .lru_fallback_count (c2), .bloom_insert_count (c3));
  stat_counter_block #(.CNT_W(4)) dut4 (.clk, .rst_n, .clear, .dead_entry_miss, .protection_skip, .lru_fallback, .bloom_insert,
    .dead_entry_miss_count (s0), .protection_skip_count (s1), .lru_fallback_count (s2), .bloom_insert_count (s3));
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic int sat(input int v); return (v > 15) ? 15 : v; endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(c0 == 0 && c1 == 0 && c2 == 0 && c3 == 0, "reset");
    for (int n = 0; n < 1000; n++) begin
      dead_entry_miss = $urandom_range(1);
      protection_skip = $urandom_range(1);
      lru_fallback    = ($urandom_range(3) == 0);
      bloom_insert    = $urandom_range(1);
      clear           = (n == 500);
      @(negedge clk);
      if (clear) begin r0 = 0; r1 = 0; r2 = 0; r3 = 0; end
      else begin r0 += dead_entry_miss; r1 += protection_skip; r2 += lru_fallback; r3 += bloom_insert; end
      check(c0 == r0 && c1 == r1 && c2 == r2 && c3 == r3, "counts");
      check(s0 == sat(r0) && s1 == sat(r1) && s2 == sat(r2) && s3 == sat(r3), "saturating counts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
