// depot_l2_subsystem: shared L2 TLB level of a GPU address-translation
// hierarchy with DEPOT (Dead-Entry PrOTection).
//
// Requests are L1 TLB misses (VPN plus a requester tag). Each one looks up
// the L2 TLB (80-cycle pipeline). A hit is answered at once. A miss goes to
// the L2 MSHR, which merges it with an in-flight walk of the same VPN or
// allocates an entry and queues a page walk; the GMMU's 16 walkers read
// the page table through the mem_* port and return fills, which install
// the translation and release every merged requester.
//
// DEPOT adds three things around this datapath:
//  * detection: every miss queries an eviction-history Bloom filter; a hit
//    marks a probable dead-entry re-walk and registers its VPN in the
//    Pending Dead-Entry Set (PDS);
//  * fill: a fill whose VPN is in the PDS gets a protection window, its
//    protect_until field set to now + W by the protection timestamp writer;
//  * eviction: the replacement cascade avoids protected ways (invalid way,
//    else LRU among unprotected ways, else plain LRU), and every evicted
//    VPN is inserted into the Bloom filter (cleared every 1024 insertions).
// A kernel boundary clears all protection. Statistics (dead-entry misses,
// protection skips, LRU fallbacks, filter insertions), MSHR occupancy and
// dead-slot occupancy are available as outputs.
//
// Interface: req valid/ready; resp valid (not back-pressured) with the
// requester tag, VPN and PPN; mem_req valid/ready with byte address and
// walker tag, mem_resp valid with tag and 64-bit page-table entry; root =
// frame of the top-level page table; cycle_now = cycle-counter feed-in
// (low 20 bits); csr_* writes W (addr 0) and the DEPOT enable (addr 1).
//
// Timing: a hit answers LOOKUP_LAT cycles after acceptance (plus stalls);
// MSHR releases take priority over hit answers on the single resp port.
// A walk whose leaf entry is not present returns PPN 0 and installs
// nothing.
module depot_l2_subsystem
  import depot_pkg::*;
#(
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
  // translation requests from the L1 level
  input  logic        req_valid,
  output logic        req_ready,
  input  vpn_t        req_vpn,
  input  req_id_t     req_id,
  output logic        resp_valid,
  output req_id_t     resp_id,
  output vpn_t        resp_vpn,
  output ppn_t        resp_ppn,
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
  // ---------------- configuration ----------------
  timer_t window;
  logic   enable;

  depot_config_reg #(.W_DEFAULT(W_DEFAULT)) u_cfg (
    .clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .window, .enable
  );

  // ---------------- L2 TLB ----------------
  logic    l2_res_valid, l2_res_ready, l2_res_hit;
  vpn_t    l2_res_vpn;
  ppn_t    l2_res_ppn;
  req_id_t l2_res_id;
  logic    l2_fill_valid, set_protect;
  timer_t  protect_until;
  logic    evict_valid, victim_skip, victim_fallback, fill_dup;
  vpn_t    evict_vpn;
  logic [$clog2(L2_WAYS)-1:0] victim_way;

  // ---------------- MSHR / walk path ----------------
  logic    miss_valid, miss_ready, miss_new_walk, miss_fire, is_dead;
  logic    walk_valid, walk_ready;
  vpn_t    walk_vpn;
  logic    mshr_fill_ready, mshr_resp_valid;
  req_id_t mshr_resp_id;
  vpn_t    mshr_resp_vpn;
  ppn_t    mshr_resp_ppn;
  logic    q_valid, q_ready;
  vpn_t    q_vpn;
  logic    pt_fill_valid, pt_fill_fault, fill_fire;
  vpn_t    pt_fill_vpn;
  ppn_t    pt_fill_ppn;

  // ---------------- DEPOT ----------------
  vpn_t    bloom_qry_vpn, pds_vpn;
  logic    bloom_hit, dead_event, pds_insert, pds_hit, bloom_ins;

  assign fill_fire     = pt_fill_valid && mshr_fill_ready;
  assign l2_fill_valid = fill_fire && !pt_fill_fault;

  l2_tlb #(.ENTRIES(L2_ENTRIES), .WAYS(L2_WAYS), .LOOKUP_LAT(L2_LOOKUP_LAT)) u_l2 (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_vpn, .req_id,
    .res_valid (l2_res_valid), .res_ready (l2_res_ready), .res_hit (l2_res_hit),
    .res_vpn (l2_res_vpn), .res_ppn (l2_res_ppn), .res_id (l2_res_id),
    .fill_valid (l2_fill_valid), .fill_vpn (pt_fill_vpn), .fill_ppn (pt_fill_ppn),
    .fill_protect (set_protect), .fill_protect_until (protect_until),
    .evict_valid, .evict_vpn, .victim_way, .victim_skip, .victim_fallback, .fill_dup,
    .now (cycle_now), .kernel_flush (kernel_boundary),
    .protected_count (protected_entries)
  );

  // hits answer unless the MSHR is releasing; misses wait for the MSHR
  assign l2_res_ready = l2_res_hit ? !mshr_resp_valid : miss_ready;
  assign miss_valid   = l2_res_valid && !l2_res_hit;
  assign miss_fire    = miss_valid && miss_ready;

  assign resp_valid = mshr_resp_valid || (l2_res_valid && l2_res_hit);
  assign resp_id    = mshr_resp_valid ? mshr_resp_id  : l2_res_id;
  assign resp_vpn   = mshr_resp_valid ? mshr_resp_vpn : l2_res_vpn;
  assign resp_ppn   = mshr_resp_valid ? mshr_resp_ppn : l2_res_ppn;

  dead_entry_detect u_detect (
    .miss_valid (miss_fire), .miss_vpn (l2_res_vpn), .miss_new_walk,
    .enable, .bloom_qry_vpn, .bloom_hit, .is_dead, .dead_event, .pds_insert, .pds_vpn
  );

  l2_tlb_mshr #(.ENTRIES(MSHR_ENTRIES), .MERGE(MSHR_MERGE)) u_mshr (
    .clk, .rst_n,
    .miss_valid, .miss_ready, .miss_vpn (l2_res_vpn), .miss_id (l2_res_id),
    .miss_dead (is_dead), .miss_new_walk,
    .walk_valid, .walk_ready, .walk_vpn,
    .fill_valid (pt_fill_valid), .fill_ready (mshr_fill_ready),
    .fill_vpn (pt_fill_vpn), .fill_ppn (pt_fill_ppn),
    .resp_valid (mshr_resp_valid), .resp_id (mshr_resp_id),
    .resp_vpn (mshr_resp_vpn), .resp_ppn (mshr_resp_ppn),
    .occupancy (mshr_occupancy), .dead_slots (mshr_dead_slots)
  );

  page_walk_queue #(.DEPTH(PWQ_DEPTH)) u_pwq (
    .clk, .rst_n,
    .push_valid (walk_valid), .push_ready (walk_ready), .push_vpn (walk_vpn),
    .pop_valid (q_valid), .pop_ready (q_ready), .pop_vpn (q_vpn), .count ()
  );

  gmmu_ptw_pool #(.NUM_PTW(NUM_PTW), .PWC_ENTRIES(PWC_ENTRIES), .PWC_LAT(PWC_LAT)) u_gmmu (
    .clk, .rst_n, .root,
    .q_valid, .q_ready, .q_vpn,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_tag,
    .mem_resp_valid, .mem_resp_tag, .mem_resp_data,
    .fill_valid (pt_fill_valid), .fill_ready (mshr_fill_ready),
    .fill_vpn (pt_fill_vpn), .fill_ppn (pt_fill_ppn), .fill_fault (pt_fill_fault),
    .busy_count (walkers_busy)
  );

  bloom_filter #(.BITS(BLOOM_BITS), .RESET_INSERTS(BLOOM_RESET)) u_bloom (
    .clk, .rst_n,
    .ins_valid (bloom_ins), .ins_vpn (evict_vpn),
    .qry_vpn (bloom_qry_vpn), .saturate (bloom_saturate), .qry_hit (bloom_hit),
    .cleared (bloom_cleared), .ins_count ()
  );
  assign bloom_ins = evict_valid && enable;

  pending_dead_entry_set #(.SLOTS(PDS_SLOTS)) u_pds (
    .clk, .rst_n,
    .ins_valid (pds_insert), .ins_vpn (pds_vpn),
    .qry_vpn (pt_fill_vpn), .qry_hit (pds_hit),
    .erase (fill_fire), .flush (kernel_boundary),
    .full (), .occupancy ()
  );

  protection_timestamp_writer u_ptsw (
    .fill_valid (l2_fill_valid), .is_dead_entry (pds_hit), .enable,
    .now (cycle_now), .window, .set_protect, .protect_until
  );

  stat_counter_block #(.CNT_W(32)) u_stats (
    .clk, .rst_n, .clear (stats_clear),
    .dead_entry_miss (dead_event), .protection_skip (victim_skip),
    .lru_fallback (victim_fallback), .bloom_insert (bloom_ins),
    .dead_entry_miss_count (stat_dead_entry_miss),
    .protection_skip_count (stat_protection_skip),
    .lru_fallback_count    (stat_lru_fallback),
    .bloom_insert_count    (stat_bloom_insert)
  );
endmodule
