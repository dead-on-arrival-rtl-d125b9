// l2_tlb: shared set-associative L2 TLB with the DEPOT tag-array fields.
//
// Each entry holds valid, vpn, ppn, last_access_time (here an LRU rank,
// 0 = most recently used) and protect_until_cycle (20 bits), plus a
// prot_active flag. Lookups travel through a LOOKUP_LAT-deep request
// pipeline and are compared against the set at its end, so a result
// appears LOOKUP_LAT cycles after the request was accepted. A hit makes the
// way most recently used. A miss is handed on (res_hit = 0) to the MSHR.
//
// Fills come from completed page walks. If the VPN is already in the set
// (two walks of the same page were in flight) that way is rewritten;
// otherwise the replacement cascade picks the victim (invalid way, else LRU
// among unprotected ways, else plain LRU) and the evicted VPN is reported
// on evict_valid/evict_vpn for the eviction-history filter. When
// fill_protect is set the installed entry gets protect_until and an active
// protection flag; otherwise the entry is unprotected.
//
// An entry counts as protected while prot_active is set and its
// protect_until lies in the future (modulo-2^20 compare with the 20-bit
// cycle counter). A scrubber visits one set per cycle and clears
// prot_active of expired entries, so an expired timer can never alias
// into a "future" value after the counter wraps. kernel_flush clears every
// protection flag at once (kernel boundary).
//
// Interface: req_valid/req_ready/req_vpn/req_id; res_valid/res_ready with
// res_hit, res_vpn, res_ppn, res_id; fill_* (always accepted, one per
// cycle); now = low 20 bits of the cycle counter.
//
// Timing: the whole request pipeline stalls while a result is not taken.
// A fill has priority over the result compare of the same cycle (both
// touch the LRU state), so res_valid is held low during a fill.
//
// From the design: 1024 entries, 16 ways, 80-cycle lookup, LRU, the field
// widths, protection-aware replacement.
// Own choices: set index = low VPN bits, one request per cycle (the
// modelled TLB has 16 ports), the prot_active flag and scrubber, LRU
// ranks stored in the 8-bit last_access_time field.
module l2_tlb
  import depot_pkg::*;
#(
  parameter int unsigned ENTRIES    = 1024,
  parameter int unsigned WAYS       = 16,
  parameter int unsigned LOOKUP_LAT = 80
) (
  input  logic    clk,
  input  logic    rst_n,
  // lookup requests
  input  logic    req_valid,
  output logic    req_ready,
  input  vpn_t    req_vpn,
  input  req_id_t req_id,
  // lookup results
  output logic    res_valid,
  input  logic    res_ready,
  output logic    res_hit,
  output vpn_t    res_vpn,
  output ppn_t    res_ppn,
  output req_id_t res_id,
  // fills
  input  logic    fill_valid,
  input  vpn_t    fill_vpn,
  input  ppn_t    fill_ppn,
  input  logic    fill_protect,
  input  timer_t  fill_protect_until,
  // victim report
  output logic    evict_valid,
  output vpn_t    evict_vpn,
  output logic [$clog2(WAYS)-1:0] victim_way,
  output logic    victim_skip,
  output logic    victim_fallback,
  output logic    fill_dup,
  // time and kernel boundary
  input  timer_t  now,
  input  logic    kernel_flush,
  // protected entries (for statistics)
  output logic [$clog2(ENTRIES+1)-1:0] protected_count
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned PC_W  = $clog2(ENTRIES+1);

  // ---------------- tag array ----------------
  logic             valid_q [SETS][WAYS];
  vpn_t             vpn_q   [SETS][WAYS];
  ppn_t             ppn_q   [SETS][WAYS];
  logic [AGE_W-1:0] age_q   [SETS][WAYS];
  timer_t           until_q [SETS][WAYS];
  logic             pact_q  [SETS][WAYS];

  function automatic logic [SET_W-1:0] set_of(input vpn_t v);
    return (SETS > 1) ? v[SET_W-1:0] : '0;
  endfunction

  // ---------------- request pipeline ----------------
  logic    stg_v   [LOOKUP_LAT];
  vpn_t    stg_vpn [LOOKUP_LAT];
  req_id_t stg_id  [LOOKUP_LAT];
  logic    advance;

  assign res_valid = stg_v[LOOKUP_LAT-1] && !fill_valid;
  assign advance   = !stg_v[LOOKUP_LAT-1] || (res_valid && res_ready);
  assign req_ready = advance;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LOOKUP_LAT; s++) begin
        stg_v[s]   <= 1'b0;
        stg_vpn[s] <= '0;
        stg_id[s]  <= '0;
      end
    end else if (advance) begin
      stg_v[0]   <= req_valid;
      stg_vpn[0] <= req_vpn;
      stg_id[0]  <= req_id;
      for (int s = 1; s < LOOKUP_LAT; s++) begin
        stg_v[s]   <= stg_v[s-1];
        stg_vpn[s] <= stg_vpn[s-1];
        stg_id[s]  <= stg_id[s-1];
      end
    end
  end

  // ---------------- compare at the end of the pipeline ----------------
  logic [SET_W-1:0] lk_set;
  logic [WAYS-1:0]  lk_match;
  logic [WAY_W-1:0] lk_way;

  assign lk_set = set_of(stg_vpn[LOOKUP_LAT-1]);
  always_comb begin
    lk_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      lk_match[w] = valid_q[lk_set][w] && (vpn_q[lk_set][w] == stg_vpn[LOOKUP_LAT-1]);
      if (lk_match[w]) lk_way = WAY_W'(w);
    end
  end

  assign res_hit = |lk_match;
  assign res_vpn = stg_vpn[LOOKUP_LAT-1];
  assign res_ppn = ppn_q[lk_set][lk_way];
  assign res_id  = stg_id[LOOKUP_LAT-1];

  // ---------------- fill and victim selection ----------------
  logic [SET_W-1:0]          f_set;
  logic [WAYS-1:0]           f_valid, f_prot, f_match;
  logic [WAYS-1:0][AGE_W-1:0] f_age;
  logic [WAY_W-1:0]          f_dup_way, c_way, f_way;
  cascade_stage_e            c_stage;
  logic                      c_skip;

  assign f_set = set_of(fill_vpn);
  always_comb begin
    f_dup_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      f_valid[w] = valid_q[f_set][w];
      f_age[w]   = age_q[f_set][w];
      f_prot[w]  = pact_q[f_set][w] && timer_pending(until_q[f_set][w], now);
      f_match[w] = valid_q[f_set][w] && (vpn_q[f_set][w] == fill_vpn);
      if (f_match[w]) f_dup_way = WAY_W'(w);
    end
  end

  replacement_logic_cascade #(.WAYS(WAYS)) u_cascade (
    .valid         (f_valid),
    .age           (f_age),
    .protected_now (f_prot),
    .victim_way    (c_way),
    .stage         (c_stage),
    .skip          (c_skip)
  );

  assign fill_dup        = fill_valid && (|f_match);
  assign f_way           = fill_dup ? f_dup_way : c_way;
  assign victim_way      = f_way;
  assign evict_valid     = fill_valid && !fill_dup && f_valid[c_way];
  assign evict_vpn       = vpn_q[f_set][c_way];
  assign victim_skip     = fill_valid && !fill_dup && (c_stage == STAGE_P2_UNPROT) && c_skip;
  assign victim_fallback = fill_valid && !fill_dup && (c_stage == STAGE_P3_FALLBACK);

  // ---------------- scrubber ----------------
  logic [SET_W-1:0] scrub_set;

  // ---------------- state update ----------------
  logic             touch;
  logic [SET_W-1:0] t_set;
  logic [WAY_W-1:0] t_way;

  always_comb begin
    touch = 1'b0;
    t_set = lk_set;
    t_way = lk_way;
    if (fill_valid) begin
      touch = 1'b1;
      t_set = f_set;
      t_way = f_way;
    end else if (res_valid && res_ready && res_hit) begin
      touch = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scrub_set <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          vpn_q[s][w]   <= '0;
          ppn_q[s][w]   <= '0;
          age_q[s][w]   <= AGE_W'(w);
          until_q[s][w] <= '0;
          pact_q[s][w]  <= 1'b0;
        end
    end else begin
      scrub_set <= (SETS > 1) ? scrub_set + 1'b1 : '0;
      // expired protection windows of one set per cycle
      for (int w = 0; w < WAYS; w++)
        if (!timer_pending(until_q[scrub_set][w], now)) pact_q[scrub_set][w] <= 1'b0;
      if (kernel_flush)
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) pact_q[s][w] <= 1'b0;
      // LRU update: the touched way becomes MRU
      if (touch)
        for (int w = 0; w < WAYS; w++)
          if (age_q[t_set][w] < age_q[t_set][t_way]) age_q[t_set][w] <= age_q[t_set][w] + 1'b1;
      if (touch) age_q[t_set][t_way] <= '0;
      // install
      if (fill_valid) begin
        valid_q[f_set][f_way] <= 1'b1;
        vpn_q[f_set][f_way]   <= fill_vpn;
        ppn_q[f_set][f_way]   <= fill_ppn;
        if (fill_protect) begin
          until_q[f_set][f_way] <= fill_protect_until;
          pact_q[f_set][f_way]  <= 1'b1;
        end else if (!fill_dup) begin
          pact_q[f_set][f_way]  <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    protected_count = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) protected_count += PC_W'(pact_q[s][w]);
  end
endmodule
