// stat_counter_block: DEPOT event counters for performance-monitor readout.
//
// Four saturating counters: dead-entry misses (L2 misses that hit in the
// eviction-history filter), protection skips (the replacement cascade passed
// over the plain-LRU way because it was protected), plain-LRU fallbacks
// (every way of the set was protected) and Bloom-filter insertions. Each
// event input is a one-cycle pulse counted at the clock edge; clear zeroes
// all counters. The values are read as plain outputs.
//
// From the design: the dead-entry-miss and protection-skip counters, fed
// by the victim path, and the fallback / insertion statistics.
// Own choice: 32-bit width and saturation.
module stat_counter_block #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             dead_entry_miss,
  input  logic             protection_skip,
  input  logic             lru_fallback,
  input  logic             bloom_insert,
  output logic [CNT_W-1:0] dead_entry_miss_count,
  output logic [CNT_W-1:0] protection_skip_count,
  output logic [CNT_W-1:0] lru_fallback_count,
  output logic [CNT_W-1:0] bloom_insert_count
);
  function automatic logic [CNT_W-1:0] bump(input logic [CNT_W-1:0] c, input logic ev);
    return (ev && c != '1) ? c + 1'b1 : c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dead_entry_miss_count <= '0;
      protection_skip_count <= '0;
      lru_fallback_count    <= '0;
      bloom_insert_count    <= '0;
    end else if (clear) begin
      dead_entry_miss_count <= '0;
      protection_skip_count <= '0;
      lru_fallback_count    <= '0;
      bloom_insert_count    <= '0;
    end else begin
      dead_entry_miss_count <= bump(dead_entry_miss_count, dead_entry_miss);
      protection_skip_count <= bump(protection_skip_count, protection_skip);
      lru_fallback_count    <= bump(lru_fallback_count, lru_fallback);
      bloom_insert_count    <= bump(bloom_insert_count, bloom_insert);
    end
  end
endmodule
