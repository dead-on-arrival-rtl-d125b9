// page_walk_cache: cache of upper-level page-table entries for the walkers.
//
// A four-level x86-64 walk reads one entry per level. The upper three levels
// are shared by many pages, so their results are cached here: an entry of
// depth d (1..3) maps the top 9*d bits of a VPN to the frame of the table
// that level d+1 of the walk must read. A lookup returns the deepest
// matching entry, letting the walker skip d memory reads.
//
// Organisation: ENTRIES fully associative entries, round-robin replacement,
// an insertion of a (depth, prefix) that is already present is ignored.
// Lookups enter a LOOKUP_LAT-deep pipeline and compare at its end; each
// lookup carries a tag (the walker number) that is returned with the
// result. One lookup and one insertion can be accepted per cycle; the
// result is not back-pressured.
//
// Timing: lk_valid in cycle t gives res_valid in cycle t + LOOKUP_LAT.
//
// From the design: 32 entries, 20-cycle lookup.
// Own choices: what is cached (the three upper levels), full
// associativity, round-robin replacement.
module page_walk_cache
  import depot_pkg::*;
#(
  parameter int unsigned ENTRIES    = 32,
  parameter int unsigned LOOKUP_LAT = 20,
  parameter int unsigned TAG_W      = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  vpn_t             lk_vpn,
  input  logic [TAG_W-1:0] lk_tag,
  output logic             res_valid,
  output logic [TAG_W-1:0] res_tag,
  output logic [1:0]       res_depth,   // 0 = miss, else levels resolved
  output ppn_t             res_base,    // frame of the next table to read
  input  logic             ins_valid,
  input  logic [1:0]       ins_depth,   // 1..3
  input  vpn_t             ins_vpn,
  input  ppn_t             ins_base,
  output logic             ins_done     // a new entry was written
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic       e_valid [ENTRIES];
  logic [1:0] e_depth [ENTRIES];
  logic [26:0] e_pfx  [ENTRIES];
  ppn_t       e_base  [ENTRIES];
  logic [IDX_W-1:0] rr_q;

  function automatic logic [26:0] prefix(input vpn_t v, input logic [1:0] d);
    logic [26:0] p;
    p = v[35:9];
    case (d)
      2'd1:    p = {v[35:27], 18'd0};
      2'd2:    p = {v[35:18], 9'd0};
      default: p = v[35:9];
    endcase
    return p;
  endfunction

  // lookup pipeline
  logic             pv [LOOKUP_LAT];
  vpn_t             pvpn [LOOKUP_LAT];
  logic [TAG_W-1:0] ptag [LOOKUP_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LOOKUP_LAT; s++) begin
        pv[s] <= 1'b0; pvpn[s] <= '0; ptag[s] <= '0;
      end
    end else begin
      pv[0] <= lk_valid; pvpn[0] <= lk_vpn; ptag[0] <= lk_tag;
      for (int s = 1; s < LOOKUP_LAT; s++) begin
        pv[s] <= pv[s-1]; pvpn[s] <= pvpn[s-1]; ptag[s] <= ptag[s-1];
      end
    end
  end

  always_comb begin
    res_depth = 2'd0;
    res_base  = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (e_valid[i] && e_depth[i] > res_depth &&
          e_pfx[i] == prefix(pvpn[LOOKUP_LAT-1], e_depth[i])) begin
        res_depth = e_depth[i];
        res_base  = e_base[i];
      end
  end
  assign res_valid = pv[LOOKUP_LAT-1];
  assign res_tag   = ptag[LOOKUP_LAT-1];

  // insertion
  logic ins_present;
  always_comb begin
    ins_present = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      if (e_valid[i] && e_depth[i] == ins_depth && e_pfx[i] == prefix(ins_vpn, ins_depth))
        ins_present = 1'b1;
  end
  assign ins_done = ins_valid && !ins_present && (ins_depth != 2'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        e_valid[i] <= 1'b0; e_depth[i] <= '0; e_pfx[i] <= '0; e_base[i] <= '0;
      end
    end else if (ins_done) begin
      e_valid[rr_q] <= 1'b1;
      e_depth[rr_q] <= ins_depth;
      e_pfx[rr_q]   <= prefix(ins_vpn, ins_depth);
      e_base[rr_q]  <= ins_base;
      rr_q          <= (rr_q == IDX_W'(ENTRIES-1)) ? '0 : rr_q + 1'b1;
    end
  end
endmodule
