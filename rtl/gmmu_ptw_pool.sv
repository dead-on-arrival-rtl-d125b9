// gmmu_ptw_pool: the GMMU's bank of page-table walkers.
//
// NUM_PTW walkers serve the page walk queue: the queue head is handed to
// the lowest-numbered idle walker, so at most NUM_PTW walks run at once and
// later misses wait in the queue. The walkers share one page-walk cache
// lookup port, one memory read port and one completion (fill) port; each
// is granted to the lowest-numbered requesting walker. A memory read
// carries the walker number as its tag, and the memory answers with that
// tag; answers may return in any order. Completed walks leave on fill_*
// (valid/ready) towards the L2 TLB and its MSHR.
//
// Timing: dispatch, cache request, memory request and completion can each
// happen once per cycle.
//
// From the design: 16 walkers behind a page walk queue, sequential
// page-table reads to DRAM, a 32-entry 20-cycle page-walk cache.
// Own choice: fixed-priority arbitration everywhere.
module gmmu_ptw_pool
  import depot_pkg::*;
#(
  parameter int unsigned NUM_PTW     = 16,
  parameter int unsigned PWC_ENTRIES = 32,
  parameter int unsigned PWC_LAT     = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ppn_t        root,
  // from the page walk queue
  input  logic        q_valid,
  output logic        q_ready,
  input  vpn_t        q_vpn,
  // memory (page-table reads)
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output pa_t         mem_req_addr,
  output logic [$clog2(NUM_PTW)-1:0] mem_req_tag,
  input  logic        mem_resp_valid,
  input  logic [$clog2(NUM_PTW)-1:0] mem_resp_tag,
  input  logic [63:0] mem_resp_data,
  // completed walks
  output logic        fill_valid,
  input  logic        fill_ready,
  output vpn_t        fill_vpn,
  output ppn_t        fill_ppn,
  output logic        fill_fault,
  output logic [$clog2(NUM_PTW+1)-1:0] busy_count
);
  localparam int unsigned TAG_W = (NUM_PTW > 1) ? $clog2(NUM_PTW) : 1;
  localparam int unsigned BC_W  = $clog2(NUM_PTW+1);

  logic [NUM_PTW-1:0] start_ready, start_valid;
  logic [NUM_PTW-1:0] pwc_req_valid, pwc_req_ready, pwc_res_valid;
  vpn_t               pwc_req_vpn [NUM_PTW];
  logic [NUM_PTW-1:0] pwc_ins_valid;
  logic [1:0]         pwc_ins_depth [NUM_PTW];
  vpn_t               pwc_ins_vpn [NUM_PTW];
  ppn_t               pwc_ins_base [NUM_PTW];
  logic [NUM_PTW-1:0] m_req_valid, m_req_ready, m_resp_valid;
  pa_t                m_req_addr [NUM_PTW];
  logic [NUM_PTW-1:0] d_valid, d_ready, d_fault, w_busy;
  vpn_t               d_vpn [NUM_PTW];
  ppn_t               d_ppn [NUM_PTW];

  // page-walk cache
  logic             c_lk_valid, c_res_valid, c_ins_valid, c_ins_done;
  vpn_t             c_lk_vpn, c_ins_vpn;
  logic [TAG_W-1:0] c_lk_tag, c_res_tag;
  logic [1:0]       c_res_depth, c_ins_depth;
  ppn_t             c_res_base, c_ins_base;

  page_walk_cache #(.ENTRIES(PWC_ENTRIES), .LOOKUP_LAT(PWC_LAT), .TAG_W(TAG_W)) u_pwc (
    .clk, .rst_n,
    .lk_valid (c_lk_valid), .lk_vpn (c_lk_vpn), .lk_tag (c_lk_tag),
    .res_valid (c_res_valid), .res_tag (c_res_tag), .res_depth (c_res_depth), .res_base (c_res_base),
    .ins_valid (c_ins_valid), .ins_depth (c_ins_depth), .ins_vpn (c_ins_vpn), .ins_base (c_ins_base),
    .ins_done (c_ins_done)
  );

  // fixed-priority grants
  function automatic logic [NUM_PTW-1:0] first_one(input logic [NUM_PTW-1:0] v);
    logic [NUM_PTW-1:0] g;
    g = '0;
    for (int i = NUM_PTW-1; i >= 0; i--) if (v[i]) g = NUM_PTW'(1) << i;
    return g;
  endfunction

  logic [NUM_PTW-1:0] g_start, g_pwc, g_mem, g_done;
  assign g_start       = first_one(start_ready);
  assign start_valid   = q_valid ? g_start : '0;
  assign q_ready       = |start_ready;
  assign g_pwc         = first_one(pwc_req_valid);
  assign pwc_req_ready = g_pwc;
  assign g_mem         = first_one(m_req_valid);
  assign m_req_ready   = mem_req_ready ? g_mem : '0;
  assign g_done        = first_one(d_valid);
  assign d_ready       = fill_ready ? g_done : '0;

  always_comb begin
    c_lk_valid = |pwc_req_valid;
    c_lk_vpn = '0; c_lk_tag = '0;
    mem_req_valid = |m_req_valid;
    mem_req_addr = '0; mem_req_tag = '0;
    fill_valid = |d_valid;
    fill_vpn = '0; fill_ppn = '0; fill_fault = 1'b0;
    c_ins_valid = 1'b0; c_ins_depth = '0; c_ins_vpn = '0; c_ins_base = '0;
    busy_count = '0;
    for (int i = 0; i < NUM_PTW; i++) begin
      if (g_pwc[i]) begin c_lk_vpn = pwc_req_vpn[i]; c_lk_tag = TAG_W'(i); end
      if (g_mem[i]) begin mem_req_addr = m_req_addr[i]; mem_req_tag = TAG_W'(i); end
      if (g_done[i]) begin fill_vpn = d_vpn[i]; fill_ppn = d_ppn[i]; fill_fault = d_fault[i]; end
      if (pwc_ins_valid[i]) begin
        c_ins_valid = 1'b1; c_ins_depth = pwc_ins_depth[i];
        c_ins_vpn = pwc_ins_vpn[i]; c_ins_base = pwc_ins_base[i];
      end
      busy_count += BC_W'(w_busy[i]);
    end
  end

  for (genvar i = 0; i < NUM_PTW; i++) begin : g_walker
    assign pwc_res_valid[i] = c_res_valid && (c_res_tag == TAG_W'(i));
    assign m_resp_valid[i]  = mem_resp_valid && (mem_resp_tag == TAG_W'(i));

    page_table_walker u_ptw (
      .clk, .rst_n, .root,
      .start_valid   (start_valid[i]),
      .start_ready   (start_ready[i]),
      .start_vpn     (q_vpn),
      .pwc_req_valid (pwc_req_valid[i]),
      .pwc_req_ready (pwc_req_ready[i]),
      .pwc_req_vpn   (pwc_req_vpn[i]),
      .pwc_res_valid (pwc_res_valid[i]),
      .pwc_res_depth (c_res_depth),
      .pwc_res_base  (c_res_base),
      .pwc_ins_valid (pwc_ins_valid[i]),
      .pwc_ins_depth (pwc_ins_depth[i]),
      .pwc_ins_vpn   (pwc_ins_vpn[i]),
      .pwc_ins_base  (pwc_ins_base[i]),
      .mem_req_valid (m_req_valid[i]),
      .mem_req_ready (m_req_ready[i]),
      .mem_req_addr  (m_req_addr[i]),
      .mem_resp_valid(m_resp_valid[i]),
      .mem_resp_data (mem_resp_data),
      .done_valid    (d_valid[i]),
      .done_ready    (d_ready[i]),
      .done_vpn      (d_vpn[i]),
      .done_ppn      (d_ppn[i]),
      .done_fault    (d_fault[i]),
      .busy          (w_busy[i])
    );
  end
endmodule
