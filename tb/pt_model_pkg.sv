// pt_model_pkg: synthetic page table used by the testbenches.
//
// Every 8-byte page-table entry is a pure function of its physical address:
// bit 0 (present) is set unless the entry sits at index 511 of its table,
// and bits 47:12 hold a frame number mixed from the address. A walk of a
// VPN from a root frame can therefore be predicted without any memory
// array (walk_ppn), which is how testbenches check translations.
package pt_model_pkg;
  function automatic logic [35:0] frame_of(input logic [47:0] addr);
    logic [63:0] x;
    x = {16'd0, addr} * 64'h0000_0000_9E37_79B1;
    return x[51:16] ^ {addr[47:12]};
  endfunction

  function automatic logic [63:0] pte_of(input logic [47:0] addr);
    logic present;
    present = (addr[11:3] != 9'h1FF);
    return {16'd0, frame_of(addr), 11'd0, present};
  endfunction

  // expected result of a 4-level walk; fault when any entry is not present
  function automatic logic [36:0] walk(input logic [35:0] vpn, input logic [35:0] root);
    logic [35:0] base;
    logic [63:0] e;
    logic [8:0]  idx;
    base = root;
    for (int l = 0; l < 4; l++) begin
      idx = vpn[35 - 9*l -: 9];
      e = pte_of({base, 12'd0} + {36'd0, idx, 3'd0});
      if (!e[0]) return {1'b1, 36'd0};
      base = e[47:12];
    end
    return {1'b0, base};
  endfunction
endpackage
