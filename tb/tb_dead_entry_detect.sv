// tb_dead_entry_detect: all input combinations of the miss-path decision.
module tb_dead_entry_detect;
  import depot_pkg::*;
  logic miss_valid, miss_new_walk, enable, bloom_hit, is_dead, dead_event, pds_insert;
  vpn_t miss_vpn, bloom_qry_vpn, pds_vpn;
  int checks = 0, failures = 0;

  dead_entry_detect dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 64; n++) begin
      {miss_valid, miss_new_walk, enable, bloom_hit} = 4'(n);
      miss_vpn = {$urandom, $urandom} & 36'hF_FFFF_FFFF;
      #1;
      checks++;
      if (bloom_qry_vpn !== miss_vpn || pds_vpn !== miss_vpn) failures++;
      checks++;
      if (is_dead !== (miss_valid && enable && bloom_hit) || dead_event !== is_dead) failures++;
      checks++;
      if (pds_insert !== (miss_valid && enable && bloom_hit && miss_new_walk)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
