// depot_pkg: types and constants shared by the DEPOT L2 TLB subsystem.
//
// The address widths follow the L2 TLB tag-array fields of the design
// (36-bit VPN, 36-bit PPN, i.e. 4 KB pages in a 48-bit x86-64 style address
// space). The protection timer is 20 bits wide, as the design specifies.
// The Bloom-filter hash functions are this implementation's choice: the
// design only asks for three independent hashes into the 8192-bit vector.
package depot_pkg;

  localparam int unsigned VPN_W   = 36;   // virtual page number
  localparam int unsigned PPN_W   = 36;   // physical frame number
  localparam int unsigned PA_W    = 48;   // physical byte address
  localparam int unsigned TIMER_W = 20;   // per-entry protect_until_cycle
  localparam int unsigned AGE_W   = 8;    // per-entry last_access_time (LRU age)
  localparam int unsigned ID_W    = 10;   // requester tag carried with a request

  typedef logic [VPN_W-1:0]   vpn_t;
  typedef logic [PPN_W-1:0]   ppn_t;
  typedef logic [PA_W-1:0]    pa_t;
  typedef logic [TIMER_W-1:0] timer_t;
  typedef logic [ID_W-1:0]    req_id_t;

  // Which stage of the replacement cascade chose the victim.
  typedef enum logic [1:0] {
    STAGE_P1_INVALID   = 2'd1,  // an invalid way was free
    STAGE_P2_UNPROT    = 2'd2,  // LRU among unprotected ways
    STAGE_P3_FALLBACK  = 2'd3   // every way protected: plain LRU
  } cascade_stage_e;

  // One L2 TLB entry as held in the tag array (Fig. of the DEPOT datapath):
  // valid, vpn, ppn, last_access_time, protect_until_cycle. prot_active is
  // this implementation's addition that marks a running protection window.
  typedef struct packed {
    logic        valid;
    vpn_t        vpn;
    ppn_t        ppn;
    logic [AGE_W-1:0] age;
    timer_t      protect_until;
    logic        prot_active;
  } tlb_entry_t;

  // Multiplicative hash constants (odd) for h1, h2, h3.
  localparam logic [27:0] HASH_K1 = 28'h9E3779B;
  localparam logic [27:0] HASH_K2 = 28'h85EBCA7;
  localparam logic [27:0] HASH_K3 = 28'hC2B2AE3;

  // Mixing step of h_i(vpn): the low 48 bits of vpn * K_i. The filter takes
  // the upper log2(bits) bits of this value as the bit index.
  function automatic logic [47:0] bloom_mix(input vpn_t vpn, input int unsigned which);
    logic [63:0] prod;
    logic [27:0] k;
    case (which)
      0:       k = HASH_K1;
      1:       k = HASH_K2;
      default: k = HASH_K3;
    endcase
    prod = {28'd0, vpn} * {36'd0, k};
    return prod[47:0];
  endfunction

  // Protection is still running when the expiry lies in the future, judged
  // modulo 2^TIMER_W: 0 < (expiry - now) mod 2^20 <= 2^19.
  function automatic logic timer_pending(input timer_t expiry, input timer_t now);
    timer_t diff;
    diff = expiry - now;
    return (diff != '0) && (diff <= timer_t'(1 << (TIMER_W-1)));
  endfunction

endpackage
