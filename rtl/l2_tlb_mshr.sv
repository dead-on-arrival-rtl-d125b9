// l2_tlb_mshr: miss status holding registers of the shared L2 TLB.
//
// Each entry tracks one VPN whose page walk is in flight and the requesters
// waiting for it. A miss whose VPN already has a walking entry is merged
// into it (up to MERGE requesters per entry), so one walk serves all of
// them; a miss with no such entry allocates a free entry and launches one
// walk (walk_valid/walk_vpn, towards the page walk queue). When the walk
// fills, the entry is released and its requesters are answered one per
// cycle on resp_*, all with the same translation.
//
// Each entry also remembers whether its walk was flagged as a probable
// dead-entry re-walk; dead_slots counts such entries (the MSHR dead-slot
// occupancy whose bursts show shared-page interference) and occupancy
// counts all valid entries.
//
// Interface: miss_valid/miss_ready with miss_vpn, miss_id, miss_dead;
// miss_new_walk tells (combinationally) whether this miss would allocate.
// fill_valid/fill_ready with fill_vpn/fill_ppn. resp_valid with resp_id,
// resp_vpn, resp_ppn is not back-pressured.
//
// Timing: a miss is back-pressured when its entry already holds MERGE
// requesters, when no entry is free, or when the walk queue is full. A fill
// is refused while another entry is still draining. Draining an entry with
// n requesters takes n cycles, starting the cycle after the fill.
//
// From the design: 128 entries, 8-way merge, one walk per VPN, release of
// all merged requesters on fill, dead-slot occupancy.
// Own choices: the back-pressure rules and the one-per-cycle release.
module l2_tlb_mshr
  import depot_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned MERGE   = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    miss_valid,
  output logic    miss_ready,
  input  vpn_t    miss_vpn,
  input  req_id_t miss_id,
  input  logic    miss_dead,
  output logic    miss_new_walk,
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
  output logic [$clog2(ENTRIES+1)-1:0] occupancy,
  output logic [$clog2(ENTRIES+1)-1:0] dead_slots
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned CNT_W = $clog2(MERGE+1);
  localparam int unsigned OCC_W = $clog2(ENTRIES+1);

  logic             valid_q [ENTRIES];
  logic             dead_q  [ENTRIES];
  vpn_t             vpn_q   [ENTRIES];
  logic [CNT_W-1:0] cnt_q   [ENTRIES];
  req_id_t          ids_q   [ENTRIES][MERGE];

  logic             drain_q;
  logic [IDX_W-1:0] drain_idx_q;
  logic [CNT_W-1:0] drain_pos_q;
  ppn_t             drain_ppn_q;

  // ---- miss side ----
  logic             m_found, free_found, f_found;
  logic [IDX_W-1:0] m_idx, free_idx, f_idx;

  always_comb begin
    m_found = 1'b0; m_idx = '0;
    free_found = 1'b0; free_idx = '0;
    f_found = 1'b0; f_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (valid_q[i] && !(drain_q && drain_idx_q == IDX_W'(i)) && vpn_q[i] == miss_vpn) begin
        m_found = 1'b1; m_idx = IDX_W'(i);
      end
      if (!valid_q[i]) begin
        free_found = 1'b1; free_idx = IDX_W'(i);
      end
      if (valid_q[i] && !(drain_q && drain_idx_q == IDX_W'(i)) && vpn_q[i] == fill_vpn) begin
        f_found = 1'b1; f_idx = IDX_W'(i);
      end
    end
  end

  logic merge_ok, alloc_ok, miss_fire, fill_fire;
  assign miss_new_walk = !m_found;
  assign merge_ok      = m_found && (cnt_q[m_idx] < CNT_W'(MERGE));
  assign alloc_ok      = !m_found && free_found && walk_ready;
  assign miss_ready    = merge_ok || alloc_ok;
  assign miss_fire     = miss_valid && miss_ready;
  assign walk_valid    = miss_valid && alloc_ok;
  assign walk_vpn      = miss_vpn;

  assign fill_ready = !drain_q;
  assign fill_fire  = fill_valid && fill_ready && f_found;

  // ---- release ----
  assign resp_valid = drain_q;
  assign resp_id    = ids_q[drain_idx_q][drain_pos_q[$clog2(MERGE)-1:0]];
  assign resp_vpn   = vpn_q[drain_idx_q];
  assign resp_ppn   = drain_ppn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain_q     <= 1'b0;
      drain_idx_q <= '0;
      drain_pos_q <= '0;
      drain_ppn_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        dead_q[i]  <= 1'b0;
        vpn_q[i]   <= '0;
        cnt_q[i]   <= '0;
        for (int j = 0; j < MERGE; j++) ids_q[i][j] <= '0;
      end
    end else begin
      if (drain_q) begin
        if (drain_pos_q + 1'b1 >= cnt_q[drain_idx_q]) begin
          drain_q              <= 1'b0;
          valid_q[drain_idx_q] <= 1'b0;
          dead_q[drain_idx_q]  <= 1'b0;
        end
        drain_pos_q <= drain_pos_q + 1'b1;
      end
      if (fill_fire) begin
        drain_q     <= 1'b1;
        drain_idx_q <= f_idx;
        drain_pos_q <= '0;
        drain_ppn_q <= fill_ppn;
      end
      if (miss_fire) begin
        if (m_found) begin
          ids_q[m_idx][cnt_q[m_idx][$clog2(MERGE)-1:0]] <= miss_id;
          cnt_q[m_idx] <= cnt_q[m_idx] + 1'b1;
        end else begin
          valid_q[free_idx]  <= 1'b1;
          dead_q[free_idx]   <= miss_dead;
          vpn_q[free_idx]    <= miss_vpn;
          cnt_q[free_idx]    <= CNT_W'(1);
          ids_q[free_idx][0] <= miss_id;
        end
      end
    end
  end

  always_comb begin
    occupancy  = '0;
    dead_slots = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      occupancy  += OCC_W'(valid_q[i]);
      dead_slots += OCC_W'(valid_q[i] && dead_q[i]);
    end
  end

  // one requester per cycle is released; a drained entry holds at least one
  a_drain_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    drain_q |-> (cnt_q[drain_idx_q] != '0));
endmodule
