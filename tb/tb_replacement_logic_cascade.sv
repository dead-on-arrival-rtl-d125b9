// tb_replacement_logic_cascade: random 16-way sets (ages are a random
// permutation) against a reference that applies P1, P2, P3 in order.
module tb_replacement_logic_cascade;
  import depot_pkg::*;
  logic [15:0] valid, protected_now;
  logic [15:0][7:0] age;
  logic [3:0] victim_way;
  cascade_stage_e stage;
  logic skip;
  int checks = 0, failures = 0;
  int seen [4];

  replacement_logic_cascade dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int perm [16];
      int exp_way, exp_stage, lru_way, oldest;
      bit exp_skip;
      foreach (perm[i]) perm[i] = i;
      perm.shuffle();
      for (int w = 0; w < 16; w++) age[w] = 8'(perm[w]);
      case ($urandom_range(3))
        0: valid = 16'($urandom);
        default: valid = '1;
      endcase
      case ($urandom_range(3))
        0: protected_now = '1;
        1: protected_now = '0;
        default: protected_now = 16'($urandom);
      endcase
      #1;
      // reference
      lru_way = 0;
      for (int w = 0; w < 16; w++) if (perm[w] == 15) lru_way = w;
      exp_skip = 0;
      exp_way = -1;
      for (int w = 0; w < 16 && exp_way < 0; w++) if (!valid[w]) exp_way = w;
      if (exp_way >= 0) exp_stage = 1;
      else begin
        oldest = -1;
        for (int w = 0; w < 16; w++)
          if (!protected_now[w] && perm[w] > oldest) begin oldest = perm[w]; exp_way = w; end
        if (exp_way >= 0) begin exp_stage = 2; exp_skip = (exp_way != lru_way); end
        else begin exp_stage = 3; exp_way = lru_way; end
      end
      seen[exp_stage]++;
      checks++;
      if (victim_way != 4'(exp_way) || int'(stage) != exp_stage || skip != exp_skip) begin
        failures++;
        $display("FAIL way %0d/%0d stage %0d/%0d skip %0d/%0d", victim_way, exp_way, stage, exp_stage, skip, exp_skip);
      end
    end
    checks++;
    if (seen[1] == 0 || seen[2] == 0 || seen[3] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
