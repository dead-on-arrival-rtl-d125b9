// replacement_logic_cascade: protection-aware victim selection for one set.
//
// Three priority stages, as in DEPOT:
//   P1  Invalid Slot Detector   - any invalid way is taken first;
//   P2  Unprotected-LRU Selector - the least recently used way among the
//       valid ways whose protection has expired;
//   P3  Plain-LRU Fallback      - if every way is still protected, the plain
//       LRU way, so the worst case equals baseline LRU.
// A priority multiplexer picks the first stage that has a candidate.
//
// Interface: valid, age (LRU rank, larger = older) and protected_now (the
// way's protection window is still running) for each way of the set.
// Outputs the victim way, the stage that chose it, and skip, which is high
// when P2 passed over the plain-LRU way because it was protected (a
// "protection skip" for the statistics block).
//
// Timing: purely combinational.
//
// From the design: the three stages and their order.
// Own choice: among several invalid ways the lowest index wins; among equal
// ages the lowest index wins (ages are distinct ranks in practice).
module replacement_logic_cascade
  import depot_pkg::*;
#(
  parameter int unsigned WAYS = 16
) (
  input  logic [WAYS-1:0]            valid,
  input  logic [WAYS-1:0][AGE_W-1:0] age,
  input  logic [WAYS-1:0]            protected_now,
  output logic [$clog2(WAYS)-1:0]    victim_way,
  output cascade_stage_e             stage,
  output logic                       skip
);
  localparam int unsigned WAY_W = $clog2(WAYS);

  logic             p1_found, p2_found;
  logic [WAY_W-1:0] p1_way, p2_way, p3_way;
  logic [AGE_W-1:0] p2_age, p3_age;

  always_comb begin
    // P1: lowest-index invalid way
    p1_found = 1'b0;
    p1_way   = '0;
    for (int w = WAYS-1; w >= 0; w--)
      if (!valid[w]) begin
        p1_found = 1'b1;
        p1_way   = WAY_W'(w);
      end
    // P2: oldest unprotected way; P3: oldest way
    p2_found = 1'b0;
    p2_way   = '0;
    p2_age   = '0;
    p3_way   = '0;
    p3_age   = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!protected_now[w] && (!p2_found || age[w] > p2_age)) begin
        p2_found = 1'b1;
        p2_way   = WAY_W'(w);
        p2_age   = age[w];
      end
      if (w == 0 || age[w] > p3_age) begin
        p3_way = WAY_W'(w);
        p3_age = age[w];
      end
    end
    // priority multiplexer
    skip = 1'b0;
    if (p1_found) begin
      victim_way = p1_way;
      stage      = STAGE_P1_INVALID;
    end else if (p2_found) begin
      victim_way = p2_way;
      stage      = STAGE_P2_UNPROT;
      skip       = (p2_way != p3_way);
    end else begin
      victim_way = p3_way;
      stage      = STAGE_P3_FALLBACK;
    end
  end
endmodule
