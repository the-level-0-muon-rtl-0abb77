// tb_injection_mux -- random fibre and injection words, random test_mode and
// replay activity; checks the registered output against the selection rule:
// fibre words in normal mode, injected words while the replay is active in
// test mode, empty words otherwise, and the injected flag.
`include "tb_check.svh"
module tb_injection_mux;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, test_mode = 0, inj_active = 0, out_inj;
  logic [7:0][31:0] fibre = '0, inj = '0, out, exp_w;
  logic exp_i;
  int n_inj = 0;
  injection_mux dut (.clk, .rst_n, .test_mode, .fibre, .inj, .inj_active, .out,
                     .out_injected(out_inj));
  always #4 clk = ~clk;
  `WATCHDOG(clk, 5000)
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      for (int l = 0; l < 8; l++) begin fibre[l] = $urandom; inj[l] = $urandom; end
      test_mode  = (n / 100) % 2 == 1;
      inj_active = $urandom_range(0, 1);
      exp_w = !test_mode ? fibre : (inj_active ? inj : '0);
      exp_i = test_mode && inj_active;
      if (exp_i) n_inj++;
      @(negedge clk);
      `CHECK(out == exp_w, $sformatf("output words, cycle %0d", n))
      `CHECK(out_inj == exp_i, "injected flag")
    end
    `CHECK(n_inj > 100, "injected crossings were exercised")
    `FINISH
  end
endmodule
