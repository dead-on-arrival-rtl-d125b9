// protection_timestamp_writer: sets the protection window of a re-installed
// L2 TLB entry.
//
// When a page walk fills the L2 TLB and the filling VPN was found in the
// Pending Dead-Entry Set (is_dead_entry), the writer reads the cycle counter
// (now, its low 20 bits) and produces protect_until = now + W, the cycle at
// which the entry's protection expires. Fills that were not flagged leave
// the protection field untouched, so they behave exactly like the baseline.
// With DEPOT disabled (enable low) no entry is ever protected.
//
// Interface and timing: purely combinational; the tag array captures
// set_protect/protect_until on the same clock edge as the fill.
//
// From the design: now + W, W from a configuration register, 20-bit field.
// Own choice: the sum wraps modulo 2^20 (the tag array compares modulo
// 2^20), so W must stay below 2^19.
module protection_timestamp_writer
  import depot_pkg::*;
(
  input  logic   fill_valid,
  input  logic   is_dead_entry,
  input  logic   enable,
  input  timer_t now,
  input  timer_t window,
  output logic   set_protect,
  output timer_t protect_until
);
  assign set_protect   = fill_valid && is_dead_entry && enable;
  assign protect_until = now + window;
endmodule
