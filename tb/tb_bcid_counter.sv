// tb_bcid_counter -- checks the 0..3563 crossing counter over two orbits,
// the data_valid flag on crossing 0 and the forced restart by bc0.
`include "tb_check.svh"
module tb_bcid_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bc0 = 0;
  logic [11:0] bcid;
  logic dv;
  int exp_b;
  bcid_counter dut (.clk, .rst_n, .bc0, .bcid, .data_valid(dv));
  always #4 clk = ~clk;
  `WATCHDOG(clk, 20000)
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_b = 1;   // the first edge after reset counts crossing 1
    for (int i = 0; i < 2 * 3564 + 10; i++) begin
      @(negedge clk);
      `CHECK(bcid == 12'(exp_b), $sformatf("bcid %0d expected %0d", bcid, exp_b))
      `CHECK(dv == (exp_b == 0), "data_valid on crossing 0 only")
      exp_b = (exp_b + 1) % 3564;
    end
    // orbit signal in the middle of an orbit
    bc0 = 1;
    @(negedge clk);
    bc0 = 0;
    `CHECK(bcid == 0, "bc0 restarts the count")
    @(negedge clk);
    `CHECK(bcid == 1, "count continues after bc0")
    `FINISH
  end
endmodule
