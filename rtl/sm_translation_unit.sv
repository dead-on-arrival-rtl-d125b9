// sm_translation_unit: the per-SM part of the translation path.
//
// Coalesced warp requests (VPN plus warp tag) look up the SM's private L1
// TLB. A hit is answered to the warp. A miss goes to the L1 MSHR, which
// merges it with an outstanding request for the same VPN or issues a new
// request to the shared L2 level through an outgoing FIFO. Translations
// coming back from the L2 level enter an incoming FIFO; each one is
// installed in the L1 TLB (unless it is a fault, PPN 0) and releases the
// warps waiting in the L1 MSHR.
//
// Interface: warp request valid/ready with VPN and warp tag; warp response
// valid (not back-pressured) with tag, VPN and PPN; l2_req valid/ready with
// VPN; l2_resp valid with VPN and PPN (always accepted: each outstanding
// request owns one incoming FIFO slot, so it cannot overflow); flush
// (kernel boundary) invalidates the L1 TLB.
//
// Timing: L1 hit answers 20 cycles after acceptance plus stalls; MSHR
// releases take priority over hit answers on the single response port.
//
// From the design: private L1 TLB (32 entries, fully associative, 20-cycle
// lookup) and L1 MSHR (16 entries, 4-way merge) per SM, flushed at kernel
// boundaries. Own choices: one lookup port instead of four, the FIFOs and
// the response priority.
module sm_translation_unit
  import depot_pkg::*;
#(
  parameter int unsigned L1_ENTRIES    = 32,
  parameter int unsigned L1_LOOKUP_LAT = 20,
  parameter int unsigned L1_MSHR       = 16,
  parameter int unsigned L1_MERGE      = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    req_valid,
  output logic    req_ready,
  input  vpn_t    req_vpn,
  input  req_id_t req_id,
  output logic    resp_valid,
  output req_id_t resp_id,
  output vpn_t    resp_vpn,
  output ppn_t    resp_ppn,
  output logic    l2_req_valid,
  input  logic    l2_req_ready,
  output vpn_t    l2_req_vpn,
  input  logic    l2_resp_valid,
  input  vpn_t    l2_resp_vpn,
  input  ppn_t    l2_resp_ppn,
  output logic    l1_hit_event,
  output logic    l1_miss_event,
  output logic [$clog2(L1_MSHR+1)-1:0] mshr_occupancy
);
  // L1 TLB
  logic    t_res_valid, t_res_ready, t_res_hit;
  vpn_t    t_res_vpn;
  ppn_t    t_res_ppn;
  req_id_t t_res_id;
  logic    fill_fire;
  vpn_t    in_vpn;
  ppn_t    in_ppn;

  l1_tlb #(.ENTRIES(L1_ENTRIES), .LOOKUP_LAT(L1_LOOKUP_LAT)) u_tlb (
    .clk, .rst_n, .flush,
    .req_valid, .req_ready, .req_vpn, .req_id,
    .res_valid (t_res_valid), .res_ready (t_res_ready), .res_hit (t_res_hit),
    .res_vpn   (t_res_vpn),   .res_ppn   (t_res_ppn),   .res_id  (t_res_id),
    .fill_valid (fill_fire && in_ppn != '0),
    .fill_vpn   (in_vpn),
    .fill_ppn   (in_ppn)
  );

  // L1 MSHR
  logic    m_miss_ready, m_walk_valid, m_walk_ready, m_fill_ready;
  logic    m_resp_valid;
  vpn_t    m_walk_vpn;
  req_id_t m_resp_id;
  vpn_t    m_resp_vpn;
  ppn_t    m_resp_ppn;
  logic    in_valid;

  l1_tlb_mshr #(.ENTRIES(L1_MSHR), .MERGE(L1_MERGE)) u_mshr (
    .clk, .rst_n,
    .miss_valid (t_res_valid && !t_res_hit),
    .miss_ready (m_miss_ready),
    .miss_vpn   (t_res_vpn),
    .miss_id    (t_res_id),
    .walk_valid (m_walk_valid), .walk_ready (m_walk_ready), .walk_vpn (m_walk_vpn),
    .fill_valid (in_valid),     .fill_ready (m_fill_ready),
    .fill_vpn   (in_vpn),       .fill_ppn   (in_ppn),
    .resp_valid (m_resp_valid), .resp_id (m_resp_id),
    .resp_vpn   (m_resp_vpn),   .resp_ppn (m_resp_ppn),
    .occupancy  (mshr_occupancy)
  );

  assign t_res_ready = t_res_hit ? !m_resp_valid : m_miss_ready;
  assign fill_fire   = in_valid && m_fill_ready;

  assign resp_valid = m_resp_valid || (t_res_valid && t_res_hit);
  assign resp_id    = m_resp_valid ? m_resp_id  : t_res_id;
  assign resp_vpn   = m_resp_valid ? m_resp_vpn : t_res_vpn;
  assign resp_ppn   = m_resp_valid ? m_resp_ppn : t_res_ppn;

  assign l1_hit_event  = t_res_valid && t_res_ready && t_res_hit;
  assign l1_miss_event = t_res_valid && t_res_ready && !t_res_hit;

  // FIFOs towards and from the L2 level
  logic in_push_ready;

  sync_fifo #(.WIDTH(VPN_W), .DEPTH(L1_MSHR)) u_out (
    .clk, .rst_n,
    .push_valid (m_walk_valid), .push_ready (m_walk_ready), .push_data (m_walk_vpn),
    .pop_valid  (l2_req_valid), .pop_ready  (l2_req_ready), .pop_data  (l2_req_vpn)
  );

  sync_fifo #(.WIDTH(VPN_W + PPN_W), .DEPTH(L1_MSHR)) u_in (
    .clk, .rst_n,
    .push_valid (l2_resp_valid), .push_ready (in_push_ready),
    .push_data  ({l2_resp_vpn, l2_resp_ppn}),
    .pop_valid  (in_valid), .pop_ready (m_fill_ready),
    .pop_data   ({in_vpn, in_ppn})
  );

  a_in_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                     l2_resp_valid |-> in_push_ready);
endmodule
