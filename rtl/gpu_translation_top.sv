// gpu_translation_top: GPU address-translation hierarchy with DEPOT.
//
// NUM_SM streaming multiprocessors each own a private translation unit
// (L1 TLB + L1 MSHR, sm_translation_unit). Their L2 requests are
// arbitrated round-robin, one per cycle, onto the shared L2 level
// (depot_l2_subsystem: L2 TLB with DEPOT, L2 MSHR, page walk queue, GMMU
// walkers and page-walk cache). The L2 answers carry the SM index as their
// tag and are steered back to that SM's incoming FIFO. A kernel boundary
// flushes every L1 TLB and clears all L2 protection.
//
// Interface: per-SM arrays of warp requests (valid/ready, VPN, warp tag)
// and warp responses (valid, not back-pressured, with tag, VPN, PPN); the
// page-table memory port, timer feed-in, kernel boundary, filter
// saturation, CSR and statistics-clear inputs of the L2 level; L2 and L1
// statistics as outputs.
//
// Timing: L1 hit 20 cycles; an L1 miss adds the arbiter, the 80-cycle L2
// lookup and, on an L2 miss, the page walk (memory latency set by the
// page-table memory). A PPN of 0 marks a walk that found no mapping.
//
// From the design: 46 SMs, private L1 TLBs, shared L2 TLB, flush at kernel
// boundaries, the DEPOT L2. Own choices: the round-robin arbiter, one
// request per cycle into the L2 (the modelled L2 has 16 ports), the SM-tag
// routing of answers.
module gpu_translation_top
  import depot_pkg::*;
#(
  parameter int unsigned NUM_SM        = 46,
  parameter int unsigned L1_ENTRIES    = 32,
  parameter int unsigned L1_LOOKUP_LAT = 20,
  parameter int unsigned L1_MSHR       = 16,
  parameter int unsigned L1_MERGE      = 4,
  parameter int unsigned L2_ENTRIES    = 1024,
  parameter int unsigned L2_WAYS       = 16,
  parameter int unsigned L2_LOOKUP_LAT = 80,
  parameter int unsigned MSHR_ENTRIES  = 128,
  parameter int unsigned MSHR_MERGE    = 8,
  parameter int unsigned PWQ_DEPTH     = 128,
  parameter int unsigned NUM_PTW       = 16,
  parameter int unsigned PWC_ENTRIES   = 32,
  parameter int unsigned PWC_LAT       = 20,
  parameter int unsigned BLOOM_BITS    = 8192,
  parameter int unsigned BLOOM_RESET   = 1024,
  parameter int unsigned PDS_SLOTS     = 16,
  parameter int unsigned W_DEFAULT     = 500000
) (
  input  logic        clk,
  input  logic        rst_n,
  // warp side, one lane per SM
  input  logic        sm_req_valid [NUM_SM],
  output logic        sm_req_ready [NUM_SM],
  input  vpn_t        sm_req_vpn   [NUM_SM],
  input  req_id_t     sm_req_id    [NUM_SM],
  output logic        sm_resp_valid [NUM_SM],
  output req_id_t     sm_resp_id    [NUM_SM],
  output vpn_t        sm_resp_vpn   [NUM_SM],
  output ppn_t        sm_resp_ppn   [NUM_SM],
  // page-table memory
  input  ppn_t        root,
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output pa_t         mem_req_addr,
  output logic [$clog2(NUM_PTW)-1:0] mem_req_tag,
  input  logic        mem_resp_valid,
  input  logic [$clog2(NUM_PTW)-1:0] mem_resp_tag,
  input  logic [63:0] mem_resp_data,
  // control
  input  timer_t      cycle_now,
  input  logic        kernel_boundary,
  input  logic        bloom_saturate,
  input  logic        csr_we,
  input  logic [1:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  input  logic        stats_clear,
  // statistics
  output logic [31:0] stat_l1_hits,
  output logic [31:0] stat_l1_misses,
  output logic [31:0] stat_l2_requests,
  output logic [31:0] stat_dead_entry_miss,
  output logic [31:0] stat_protection_skip,
  output logic [31:0] stat_lru_fallback,
  output logic [31:0] stat_bloom_insert,
  output logic [$clog2(MSHR_ENTRIES+1)-1:0] mshr_occupancy,
  output logic [$clog2(MSHR_ENTRIES+1)-1:0] mshr_dead_slots,
  output logic [$clog2(L2_ENTRIES+1)-1:0]   protected_entries,
  output logic [$clog2(NUM_PTW+1)-1:0]      walkers_busy,
  output logic        bloom_cleared
);
  localparam int unsigned SM_W = (NUM_SM > 1) ? $clog2(NUM_SM) : 1;

  logic l2q_valid [NUM_SM];
  logic l2q_ready [NUM_SM];
  vpn_t l2q_vpn   [NUM_SM];
  logic hit_ev    [NUM_SM];
  logic miss_ev   [NUM_SM];

  logic    l2_resp_valid;
  req_id_t l2_resp_id;
  vpn_t    l2_resp_vpn;
  ppn_t    l2_resp_ppn;

  for (genvar s = 0; s < NUM_SM; s++) begin : g_sm
    logic [$clog2(L1_MSHR+1)-1:0] occ_unused;
    sm_translation_unit #(
      .L1_ENTRIES (L1_ENTRIES), .L1_LOOKUP_LAT (L1_LOOKUP_LAT),
      .L1_MSHR    (L1_MSHR),    .L1_MERGE      (L1_MERGE)
    ) u_sm (
      .clk, .rst_n,
      .flush         (kernel_boundary),
      .req_valid     (sm_req_valid[s]), .req_ready (sm_req_ready[s]),
      .req_vpn       (sm_req_vpn[s]),   .req_id    (sm_req_id[s]),
      .resp_valid    (sm_resp_valid[s]), .resp_id (sm_resp_id[s]),
      .resp_vpn      (sm_resp_vpn[s]),   .resp_ppn (sm_resp_ppn[s]),
      .l2_req_valid  (l2q_valid[s]), .l2_req_ready (l2q_ready[s]), .l2_req_vpn (l2q_vpn[s]),
      .l2_resp_valid (l2_resp_valid && l2_resp_id == req_id_t'(s)),
      .l2_resp_vpn   (l2_resp_vpn),
      .l2_resp_ppn   (l2_resp_ppn),
      .l1_hit_event  (hit_ev[s]),
      .l1_miss_event (miss_ev[s]),
      .mshr_occupancy (occ_unused)
    );
  end

  // round-robin arbiter towards the L2 request port
  logic [SM_W-1:0] rr_q, grant;
  logic            any_req, l2_req_ready;

  always_comb begin
    any_req = 1'b0;
    grant   = '0;
    for (int k = NUM_SM-1; k >= 0; k--) begin
      int unsigned s;
      s = (int'(rr_q) + k) % NUM_SM;
      if (l2q_valid[s]) begin any_req = 1'b1; grant = SM_W'(s); end
    end
    for (int s = 0; s < NUM_SM; s++)
      l2q_ready[s] = l2_req_ready && any_req && (grant == SM_W'(s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_q <= '0;
    else if (any_req && l2_req_ready)
      rr_q <= (grant == SM_W'(NUM_SM-1)) ? '0 : grant + 1'b1;
  end

  depot_l2_subsystem #(
    .L2_ENTRIES (L2_ENTRIES), .L2_WAYS (L2_WAYS), .L2_LOOKUP_LAT (L2_LOOKUP_LAT),
    .MSHR_ENTRIES (MSHR_ENTRIES), .MSHR_MERGE (MSHR_MERGE), .PWQ_DEPTH (PWQ_DEPTH),
    .NUM_PTW (NUM_PTW), .PWC_ENTRIES (PWC_ENTRIES), .PWC_LAT (PWC_LAT),
    .BLOOM_BITS (BLOOM_BITS), .BLOOM_RESET (BLOOM_RESET), .PDS_SLOTS (PDS_SLOTS),
    .W_DEFAULT (W_DEFAULT)
  ) u_l2 (
    .clk, .rst_n,
    .req_valid (any_req), .req_ready (l2_req_ready),
    .req_vpn   (l2q_vpn[grant]), .req_id (req_id_t'(grant)),
    .resp_valid (l2_resp_valid), .resp_id (l2_resp_id),
    .resp_vpn   (l2_resp_vpn),   .resp_ppn (l2_resp_ppn),
    .root, .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_tag,
    .mem_resp_valid, .mem_resp_tag, .mem_resp_data,
    .cycle_now, .kernel_boundary, .bloom_saturate,
    .csr_we, .csr_addr, .csr_wdata, .stats_clear,
    .stat_dead_entry_miss, .stat_protection_skip, .stat_lru_fallback,
    .stat_bloom_insert, .mshr_occupancy, .mshr_dead_slots,
    .protected_entries, .walkers_busy, .bloom_cleared
  );

  // L1-level and arbiter counters
  logic [$clog2(NUM_SM+1)-1:0] n_hit, n_miss;
  always_comb begin
    n_hit = '0; n_miss = '0;
    for (int s = 0; s < NUM_SM; s++) begin
      n_hit  = n_hit  + $bits(n_hit)'(hit_ev[s]);
      n_miss = n_miss + $bits(n_miss)'(miss_ev[s]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_l1_hits <= '0; stat_l1_misses <= '0; stat_l2_requests <= '0;
    end else if (stats_clear) begin
      stat_l1_hits <= '0; stat_l1_misses <= '0; stat_l2_requests <= '0;
    end else begin
      stat_l1_hits     <= stat_l1_hits + 32'(n_hit);
      stat_l1_misses   <= stat_l1_misses + 32'(n_miss);
      stat_l2_requests <= stat_l2_requests + 32'(any_req && l2_req_ready);
    end
  end
endmodule
