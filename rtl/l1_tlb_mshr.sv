// l1_tlb_mshr: miss status holding registers of one SM's L1 TLB.
//
// Tracks the VPNs whose translation has been requested from the L2 level
// and the warps waiting for each of them. A miss on a VPN already in
// flight merges into its entry (up to MERGE warps); a miss on a new VPN
// takes a free entry and issues one request towards the L2 TLB
// (walk_valid/walk_vpn). When the translation returns (fill_*), the entry
// releases its waiting warps one per cycle on resp_*.
//
// This is the same merge/release engine as the L2 MSHR (l2_tlb_mshr),
// instantiated with the L1 sizes; the dead-entry flag is not used at this
// level and is tied off. Interface and timing are those of l2_tlb_mshr.
//
// From the design: 16 entries, 4-way merge. Own choice: reuse of the L2
// engine, so back-pressure and one-per-cycle release behave identically.
module l1_tlb_mshr
  import depot_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned MERGE   = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    miss_valid,
  output logic    miss_ready,
  input  vpn_t    miss_vpn,
  input  req_id_t miss_id,
  output logic    walk_valid,
  input  logic    walk_ready,
  output vpn_t    walk_vpn,
  input  logic    fill_valid,
  output logic    fill_ready,
  input  vpn_t    fill_vpn,
  input  ppn_t    fill_ppn,
  output logic    resp_valid,
  output req_id_t resp_id,
  output vpn_t    resp_vpn,
  output ppn_t    resp_ppn,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  logic                         new_walk_unused;
  logic [$clog2(ENTRIES+1)-1:0] dead_unused;

  l2_tlb_mshr #(.ENTRIES(ENTRIES), .MERGE(MERGE)) u_mshr (
    .clk, .rst_n,
    .miss_valid, .miss_ready, .miss_vpn, .miss_id,
    .miss_dead     (1'b0),
    .miss_new_walk (new_walk_unused),
    .walk_valid, .walk_ready, .walk_vpn,
    .fill_valid, .fill_ready, .fill_vpn, .fill_ppn,
    .resp_valid, .resp_id, .resp_vpn, .resp_ppn,
    .occupancy,
    .dead_slots    (dead_unused)
  );
endmodule
