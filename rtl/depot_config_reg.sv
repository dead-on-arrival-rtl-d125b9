// depot_config_reg: DEPOT configuration register.
//
// Holds the protection window W (in cycles) and the DEPOT enable bit.
// Written through a simple register-write port: csr_addr 0 writes W,
// csr_addr 1 writes the enable (bit 0). Reset loads W = W_DEFAULT and
// enable = 1. A written W at or above 2^19 is clipped to 2^19-1, because
// the 20-bit protection timers are compared modulo 2^20.
//
// Timing: the new value is visible from the cycle after the write.
//
// From the design: W is configurable, default 500 K cycles.
// Own choice: register map, reset values and clipping.
module depot_config_reg
  import depot_pkg::*;
#(
  parameter int unsigned W_DEFAULT = 500000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_we,
  input  logic [1:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output timer_t      window,
  output logic        enable
);
  localparam logic [31:0] W_MAX = (32'd1 << (TIMER_W-1)) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      window <= timer_t'(W_DEFAULT);
      enable <= 1'b1;
    end else if (csr_we) begin
      case (csr_addr)
        2'd0:    window <= timer_t'((csr_wdata > W_MAX) ? W_MAX : csr_wdata);
        2'd1:    enable <= csr_wdata[0];
        default: ;
      endcase
    end
  end
endmodule
