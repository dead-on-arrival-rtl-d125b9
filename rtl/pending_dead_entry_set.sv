// pending_dead_entry_set: the Pending Dead-Entry Set (PDS) of DEPOT.
//
// A small fully associative set of VPNs whose L2 TLB miss was flagged as a
// probable dead-entry re-walk and whose page walk has not yet filled. It
// bridges the miss event and the fill event: at fill, the filling VPN is
// looked up, and a hit tells the protection writer to protect the new entry.
//
// Interface: ins_valid/ins_vpn registers a VPN in the lowest free slot (a
// VPN already present is not duplicated; with every slot in use the
// insertion is dropped and that miss simply goes unprotected). qry_vpn is
// compared combinationally with all slots; erase releases the matching slot.
// flush empties the set. full and occupancy report the fill level.
//
// Timing: insert and erase take effect at the clock edge; a query sees the
// contents of the previous cycle. Insert and erase of different VPNs may
// happen in the same cycle.
//
// From the design: at most 16 slots holding VPNs, insert/erase/query.
// Own choice: drop-on-full, no duplicates, flush at kernel boundary.
module pending_dead_entry_set
  import depot_pkg::*;
#(
  parameter int unsigned SLOTS = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ins_valid,
  input  vpn_t ins_vpn,
  input  vpn_t qry_vpn,
  output logic qry_hit,
  input  logic erase,
  input  logic flush,
  output logic full,
  output logic [$clog2(SLOTS+1)-1:0] occupancy
);
  localparam int unsigned OCC_W = $clog2(SLOTS+1);

  logic [SLOTS-1:0] valid_q;
  vpn_t             vpn_q [SLOTS];

  logic [SLOTS-1:0] qmatch, imatch;
  logic [SLOTS-1:0] free_onehot;
  logic             ins_dup;

  always_comb begin
    for (int i = 0; i < SLOTS; i++) begin
      qmatch[i] = valid_q[i] && (vpn_q[i] == qry_vpn);
      imatch[i] = valid_q[i] && (vpn_q[i] == ins_vpn);
    end
    free_onehot = '0;
    for (int i = SLOTS-1; i >= 0; i--)
      if (!valid_q[i]) free_onehot = '0 | (SLOTS'(1) << i);
  end

  assign qry_hit = |qmatch;
  assign ins_dup = |imatch;
  assign full    = &valid_q;

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < SLOTS; i++) occupancy += OCC_W'(valid_q[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      for (int i = 0; i < SLOTS; i++) vpn_q[i] <= '0;
    end else if (flush) begin
      valid_q <= '0;
    end else begin
      for (int i = 0; i < SLOTS; i++) begin
        if (erase && qmatch[i]) valid_q[i] <= 1'b0;
        if (ins_valid && !ins_dup && free_onehot[i]) begin
          valid_q[i] <= 1'b1;
          vpn_q[i]   <= ins_vpn;
        end
      end
    end
  end
endmodule
