// l1_tlb: private per-SM L1 TLB.
//
// A small fully associative TLB with true LRU replacement. A lookup enters
// a LOOKUP_LAT-deep pipeline and is compared against all entries at its
// end; a hit returns the PPN and makes the entry most recently used, a
// miss is handed on (res_hit = 0) to the L1 MSHR. Fills (translations
// returning from the L2 level) install into an invalid entry, else into
// the LRU entry; a VPN already present is rewritten in place. flush
// invalidates every entry (the L1 TLBs are flushed at each kernel
// boundary). No DEPOT state lives here: protection is an L2 mechanism.
//
// Interface: req valid/ready with VPN and requester tag; res valid/ready
// with hit, VPN, PPN, tag; fill valid (always accepted) with VPN and PPN.
//
// Timing: a result appears LOOKUP_LAT cycles after acceptance; the whole
// pipeline stalls while a result is not taken, and a fill in the same
// cycle holds the result back (both update the LRU state).
//
// From the design: 32 entries, fully associative, LRU, 20-cycle lookup,
// flush at kernel boundary. Own choice: one lookup per cycle (the modelled
// L1 TLB has 4 ports), LRU kept as ranks.
module l1_tlb
  import depot_pkg::*;
#(
  parameter int unsigned ENTRIES    = 32,
  parameter int unsigned LOOKUP_LAT = 20
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    req_valid,
  output logic    req_ready,
  input  vpn_t    req_vpn,
  input  req_id_t req_id,
  output logic    res_valid,
  input  logic    res_ready,
  output logic    res_hit,
  output vpn_t    res_vpn,
  output ppn_t    res_ppn,
  output req_id_t res_id,
  input  logic    fill_valid,
  input  vpn_t    fill_vpn,
  input  ppn_t    fill_ppn
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic             valid_q [ENTRIES];
  vpn_t             vpn_q   [ENTRIES];
  ppn_t             ppn_q   [ENTRIES];
  logic [IDX_W-1:0] age_q   [ENTRIES];

  // request pipeline
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
        stg_v[s] <= 1'b0; stg_vpn[s] <= '0; stg_id[s] <= '0;
      end
    end else if (advance) begin
      stg_v[0] <= req_valid; stg_vpn[0] <= req_vpn; stg_id[0] <= req_id;
      for (int s = 1; s < LOOKUP_LAT; s++) begin
        stg_v[s] <= stg_v[s-1]; stg_vpn[s] <= stg_vpn[s-1]; stg_id[s] <= stg_id[s-1];
      end
    end
  end

  // compare
  logic [IDX_W-1:0] lk_idx, f_idx, f_match_idx, f_free_idx, f_lru_idx;
  logic             lk_hit, f_match, f_free;
  always_comb begin
    lk_hit = 1'b0; lk_idx = '0;
    f_match = 1'b0; f_match_idx = '0;
    f_free = 1'b0; f_free_idx = '0;
    f_lru_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (valid_q[i] && vpn_q[i] == stg_vpn[LOOKUP_LAT-1]) begin lk_hit = 1'b1; lk_idx = IDX_W'(i); end
      if (valid_q[i] && vpn_q[i] == fill_vpn) begin f_match = 1'b1; f_match_idx = IDX_W'(i); end
      if (!valid_q[i]) begin f_free = 1'b1; f_free_idx = IDX_W'(i); end
      if (age_q[i] == IDX_W'(ENTRIES-1)) f_lru_idx = IDX_W'(i);
    end
    f_idx = f_match ? f_match_idx : (f_free ? f_free_idx : f_lru_idx);
  end

  assign res_hit = lk_hit;
  assign res_vpn = stg_vpn[LOOKUP_LAT-1];
  assign res_ppn = ppn_q[lk_idx];
  assign res_id  = stg_id[LOOKUP_LAT-1];

  logic             touch;
  logic [IDX_W-1:0] t_idx;
  assign touch = fill_valid || (res_valid && res_ready && lk_hit);
  assign t_idx = fill_valid ? f_idx : lk_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        valid_q[i] <= 1'b0; vpn_q[i] <= '0; ppn_q[i] <= '0; age_q[i] <= IDX_W'(i);
      end
    end else begin
      if (touch) begin
        for (int i = 0; i < ENTRIES; i++)
          if (age_q[i] < age_q[t_idx]) age_q[i] <= age_q[i] + 1'b1;
        age_q[t_idx] <= '0;
      end
      if (fill_valid) begin
        valid_q[f_idx] <= 1'b1;
        vpn_q[f_idx]   <= fill_vpn;
        ppn_q[f_idx]   <= fill_ppn;
      end
      if (flush)
        for (int i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
    end
  end
endmodule
