// page_walk_queue: FIFO of VPNs waiting for a free page-table walker.
//
// L2 TLB misses that start a new walk are pushed here by the MSHR and
// popped by the GMMU's walker dispatch in arrival order, so misses queue
// behind busy walkers. Standard valid/ready on both sides; push and pop
// may happen in the same cycle. The head is visible combinationally.
//
// From the design: a page walk queue between the L2 TLB and the walkers.
// Own choice: depth (128, one slot per MSHR entry so it never blocks).
module page_walk_queue
  import depot_pkg::*;
#(
  parameter int unsigned DEPTH = 128
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  output logic push_ready,
  input  vpn_t push_vpn,
  output logic pop_valid,
  input  logic pop_ready,
  output vpn_t pop_vpn,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  vpn_t             mem_q [DEPTH];
  logic [PTR_W-1:0] rd_q, wr_q;
  logic [CNT_W-1:0] cnt_q;
  logic             do_push, do_pop;

  assign push_ready = (cnt_q != CNT_W'(DEPTH));
  assign pop_valid  = (cnt_q != '0);
  assign pop_vpn    = mem_q[rd_q];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;
  assign count      = cnt_q;

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= push_vpn;
        wr_q        <= inc(wr_q);
      end
      if (do_pop) rd_q <= inc(rd_q);
      cnt_q <= cnt_q + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= CNT_W'(DEPTH));
endmodule
