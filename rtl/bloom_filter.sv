// bloom_filter: eviction-history Bloom filter of DEPOT.
//
// Every VPN evicted from the L2 TLB is inserted by setting three bits of a
// BITS-wide vector, one per hash function h1..h3. A missed VPN is queried by
// testing the same three bits: all set means "probably evicted recently",
// i.e. the miss is likely a dead-entry re-walk. False positives are possible,
// false negatives are not (until the vector is cleared). After every
// RESET_INSERTS insertions the whole vector is cleared, which keeps the
// false-positive rate low without a timer.
//
// Interface: ins_valid/ins_vpn insert (one per cycle); qry_vpn/qry_hit is a
// combinational query of the current vector. saturate forces every query to
// hit (worst-case false-positive experiment). cleared pulses in the cycle
// the vector is cleared; ins_count is the number of insertions since then.
//
// Timing: a query sees insertions of earlier cycles only. The clear happens
// on the clock edge of the RESET_INSERTS-th insertion, whose bits are
// dropped with the rest.
//
// From the design: 8192 bits, three hashes, clear after 1024 insertions.
// Own choice: the multiplicative hashes (depot_pkg::bloom_mix) and the
// single-cycle clear.
module bloom_filter
  import depot_pkg::*;
#(
  parameter int unsigned BITS          = 8192,
  parameter int unsigned RESET_INSERTS = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ins_valid,
  input  vpn_t  ins_vpn,
  input  vpn_t  qry_vpn,
  input  logic  saturate,
  output logic  qry_hit,
  output logic  cleared,
  output logic [$clog2(RESET_INSERTS+1)-1:0] ins_count
);
  localparam int unsigned IDX_W = $clog2(BITS);
  localparam int unsigned CNT_W = $clog2(RESET_INSERTS+1);

  logic [BITS-1:0] bits_q;
  logic [CNT_W-1:0] cnt_q;

  function automatic logic [IDX_W-1:0] h(input vpn_t vpn, input int unsigned which);
    logic [47:0] m;
    m = bloom_mix(vpn, which);
    return m[47 -: IDX_W];
  endfunction

  logic [IDX_W-1:0] qi0, qi1, qi2, ii0, ii1, ii2;
  assign qi0 = h(qry_vpn, 0);
  assign qi1 = h(qry_vpn, 1);
  assign qi2 = h(qry_vpn, 2);
  assign ii0 = h(ins_vpn, 0);
  assign ii1 = h(ins_vpn, 1);
  assign ii2 = h(ins_vpn, 2);

  assign qry_hit   = saturate | (bits_q[qi0] & bits_q[qi1] & bits_q[qi2]);
  assign cleared   = ins_valid && (cnt_q == CNT_W'(RESET_INSERTS - 1));
  assign ins_count = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q <= '0;
      cnt_q  <= '0;
    end else if (cleared) begin
      bits_q <= '0;
      cnt_q  <= '0;
    end else if (ins_valid) begin
      bits_q[ii0] <= 1'b1;
      bits_q[ii1] <= 1'b1;
      bits_q[ii2] <= 1'b1;
      cnt_q       <= cnt_q + 1'b1;
    end
  end
endmodule
