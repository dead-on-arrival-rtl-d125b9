// sync_fifo: small synchronous FIFO of WIDTH-bit words.
//
// Used between an SM's L1 MSHR and the shared L2 request port (requests)
// and between the L2 response port and the SM (translations returning).
// Standard valid/ready on both sides, push and pop in the same cycle
// allowed, head visible combinationally. The depth is this design's
// choice; each use sizes it so that it cannot overflow.
module sync_fifo #(
  parameter int unsigned WIDTH = 72,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [WIDTH-1:0] push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [WIDTH-1:0] pop_data
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PTR_W-1:0] rd_q, wr_q;
  logic [CNT_W-1:0] cnt_q;
  logic             do_push, do_pop;

  assign push_ready = (cnt_q != CNT_W'(DEPTH));
  assign pop_valid  = (cnt_q != '0);
  assign pop_data   = mem_q[rd_q];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      if (do_push) begin mem_q[wr_q] <= push_data; wr_q <= inc(wr_q); end
      if (do_pop) rd_q <= inc(rd_q);
      cnt_q <= cnt_q + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end
endmodule
