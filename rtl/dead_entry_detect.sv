// dead_entry_detect: Dead-Entry Detection Logic on the L2 TLB miss path.
//
// Every accepted L2 TLB miss presents its VPN to the eviction-history Bloom
// filter (bloom_qry_vpn). A filter hit marks the miss as a probable
// dead-entry re-walk (is_dead): the event is counted (dead_event) and, if
// the miss starts a new page walk, its VPN is registered in the Pending
// Dead-Entry Set (pds_insert) so that the fill can protect the re-installed
// entry. Misses without eviction history bypass the PDS and take the normal
// walk path. With DEPOT disabled nothing is flagged.
//
// Timing: purely combinational, in the cycle the miss is accepted by the
// L2 MSHR.
//
// From the design: miss VPN -> filter query -> PDS registration on a hit.
// Own choice: only a miss that allocates a new MSHR entry (and so a walk)
// is registered; misses merged into an existing entry share that walk.
module dead_entry_detect
  import depot_pkg::*;
(
  input  logic miss_valid,
  input  vpn_t miss_vpn,
  input  logic miss_new_walk,
  input  logic enable,
  output vpn_t bloom_qry_vpn,
  input  logic bloom_hit,
  output logic is_dead,
  output logic dead_event,
  output logic pds_insert,
  output vpn_t pds_vpn
);
  assign bloom_qry_vpn = miss_vpn;
  assign is_dead       = miss_valid && enable && bloom_hit;
  assign dead_event    = is_dead;
  assign pds_insert    = is_dead && miss_new_walk;
  assign pds_vpn       = miss_vpn;
endmodule
