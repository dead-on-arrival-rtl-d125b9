// dram_pt_model: behavioural model of the DRAM that holds the page tables.
//
// Accepts one read per cycle (req_ready is always high) and answers each
// with the synthetic page-table entry of pt_model_pkg after exactly LAT
// cycles, returning the request's tag, through a LAT-stage delay line.
// Counts the reads it served.
module dram_pt_model #(
  parameter int unsigned LAT   = 254,
  parameter int unsigned TAG_W = 4
) (
  input  logic             clk,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [47:0]      req_addr,
  input  logic [TAG_W-1:0] req_tag,
  output logic             resp_valid,
  output logic [TAG_W-1:0] resp_tag,
  output logic [63:0]      resp_data,
  output int unsigned      reads
);
  logic             pv [LAT];
  logic [TAG_W-1:0] pt [LAT];
  logic [63:0]      pd [LAT];

  assign req_ready  = 1'b1;
  assign resp_valid = pv[LAT-1];
  assign resp_tag   = pt[LAT-1];
  assign resp_data  = pd[LAT-1];

  initial begin
    reads = 0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pt[i] = '0; pd[i] = '0; end
  end

  // requests are sampled mid-cycle (falling edge), where they are stable; a
  // read presented before rising edge k is seen by the requester at edge k + LAT
  always @(negedge clk) begin
    pv[0] <= req_valid;
    pt[0] <= req_tag;
    pd[0] <= pt_model_pkg::pte_of(req_addr);
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1]; pt[i] <= pt[i-1]; pd[i] <= pd[i-1];
    end
    if (req_valid) reads <= reads + 1;
  end
endmodule
