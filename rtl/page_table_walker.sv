// page_table_walker: one hardware page-table walker of the GMMU.
//
// Translates a VPN by walking a four-level x86-64 page table. A walk first
// asks the page-walk cache for the deepest cached upper-level entry, then
// reads the remaining levels from memory one after the other: at level l
// (0 = root) it reads the 8-byte entry at base + 8 * VPN[35-9l -: 9].
// A present entry gives in bits 47:12 the frame of the next table, or, at
// the last level, the PPN. After each upper-level read the walker offers
// the result to the page-walk cache (pwc_ins_*). An entry with bit 0
// (present) clear ends the walk with fault = 1 and PPN 0.
//
// Interface: start (valid/ready, VPN; root = frame of the top-level
// table); pwc_req (valid/ready) and pwc_res (valid, depth, base) for the
// cache; mem_req (valid/ready, byte address) and mem_resp (valid, 64-bit
// entry) for memory, one read outstanding; done (valid/ready, VPN, PPN,
// fault).
//
// Timing: one read in flight at a time, so a walk costs the cache lookup
// plus (4 - depth) memory round trips.
//
// From the design: 4-level x86-64 walk, sequential reads, one walk per
// walker, page-walk cache. Own choices: entry format details, fault
// handling, the order cache-then-memory.
module page_table_walker
  import depot_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  ppn_t        root,
  input  logic        start_valid,
  output logic        start_ready,
  input  vpn_t        start_vpn,
  output logic        pwc_req_valid,
  input  logic        pwc_req_ready,
  output vpn_t        pwc_req_vpn,
  input  logic        pwc_res_valid,
  input  logic [1:0]  pwc_res_depth,
  input  ppn_t        pwc_res_base,
  output logic        pwc_ins_valid,
  output logic [1:0]  pwc_ins_depth,
  output vpn_t        pwc_ins_vpn,
  output ppn_t        pwc_ins_base,
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output pa_t         mem_req_addr,
  input  logic        mem_resp_valid,
  input  logic [63:0] mem_resp_data,
  output logic        done_valid,
  input  logic        done_ready,
  output vpn_t        done_vpn,
  output ppn_t        done_ppn,
  output logic        done_fault,
  output logic        busy
);
  typedef enum logic [2:0] {
    S_IDLE, S_PWC_REQ, S_PWC_WAIT, S_MEM_REQ, S_MEM_WAIT, S_DONE
  } state_e;

  state_e     state_q;
  vpn_t       vpn_q;
  ppn_t       base_q;
  logic [1:0] level_q;
  ppn_t       ppn_q;
  logic       fault_q;

  logic [8:0] idx;
  always_comb begin
    case (level_q)
      2'd0:    idx = vpn_q[35:27];
      2'd1:    idx = vpn_q[26:18];
      2'd2:    idx = vpn_q[17:9];
      default: idx = vpn_q[8:0];
    endcase
  end

  assign start_ready   = (state_q == S_IDLE);
  assign pwc_req_valid = (state_q == S_PWC_REQ);
  assign pwc_req_vpn   = vpn_q;
  assign mem_req_valid = (state_q == S_MEM_REQ);
  assign mem_req_addr  = {base_q, 12'd0} + {36'd0, idx, 3'd0};
  assign done_valid    = (state_q == S_DONE);
  assign done_vpn      = vpn_q;
  assign done_ppn      = ppn_q;
  assign done_fault    = fault_q;
  assign busy          = (state_q != S_IDLE);

  // the entry just read resolves levels 0..level_q; cache it if upper level
  assign pwc_ins_valid = (state_q == S_MEM_WAIT) && mem_resp_valid && mem_resp_data[0] && (level_q != 2'd3);
  assign pwc_ins_depth = level_q + 2'd1;
  assign pwc_ins_vpn   = vpn_q;
  assign pwc_ins_base  = mem_resp_data[47:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      vpn_q   <= '0;
      base_q  <= '0;
      level_q <= '0;
      ppn_q   <= '0;
      fault_q <= 1'b0;
    end else begin
      case (state_q)
        S_IDLE: if (start_valid) begin
          vpn_q   <= start_vpn;
          fault_q <= 1'b0;
          ppn_q   <= '0;
          state_q <= S_PWC_REQ;
        end
        S_PWC_REQ: if (pwc_req_ready) state_q <= S_PWC_WAIT;
        S_PWC_WAIT: if (pwc_res_valid) begin
          level_q <= pwc_res_depth;
          base_q  <= (pwc_res_depth != 2'd0) ? pwc_res_base : root;
          state_q <= S_MEM_REQ;
        end
        S_MEM_REQ: if (mem_req_ready) state_q <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_resp_valid) begin
          if (!mem_resp_data[0]) begin
            fault_q <= 1'b1;
            state_q <= S_DONE;
          end else if (level_q == 2'd3) begin
            ppn_q   <= mem_resp_data[47:12];
            state_q <= S_DONE;
          end else begin
            base_q  <= mem_resp_data[47:12];
            level_q <= level_q + 2'd1;
            state_q <= S_MEM_REQ;
          end
        end
        S_DONE: if (done_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
