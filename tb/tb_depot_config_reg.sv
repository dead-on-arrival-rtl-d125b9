// tb_depot_config_reg: reset values, writes of W and enable, clipping.
module tb_depot_config_reg;
  import depot_pkg::*;
  logic clk = 0, rst_n = 1, csr_we = 0, enable;
  logic [1:0] csr_addr = 0;
  logic [31:0] csr_wdata = 0;
  timer_t window;
  int checks = 0, failures = 0;

  depot_config_reg dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input logic [1:0] a, input logic [31:0] d);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    rst_n = 0;
    #1;
    check(window == timer_t'(500000), "reset W = 500000");
    check(enable == 1'b1, "reset enable");
    rst_n = 1;
    @(negedge clk);
    wr(2'd0, 32'd100000);
    check(window == timer_t'(100000), "write W");
    wr(2'd1, 32'd0);
    check(enable == 1'b0 && window == timer_t'(100000), "write enable");
    wr(2'd0, 32'd2000000);
    check(window == timer_t'(524287), "clip W");
    wr(2'd2, 32'd5);
    check(enable == 1'b0 && window == timer_t'(524287), "unmapped address ignored");
    wr(2'd1, 32'd1);
    check(enable == 1'b1, "re-enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
