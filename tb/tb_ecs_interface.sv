// tb_ecs_interface -- drives the local bus: checks the reset values of the
// configuration, write/read-back of every register, the self-clearing start
// and arm pulses, the decoding of table and injection writes, reads of the
// status, error, capture and derandomizer sources, and the pop strobe.
`include "tb_check.svh"
module tb_ecs_interface;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr = 0, rd = 0;
  logic [15:0] addr = 0, wdata = 0, rdata;
  pu_cfg_t cfg;
  logic inj_start, cap_arm, lut_wr, lut_sel, inj_wr, dr_pop;
  logic [11:0] lut_addr;
  logic [7:0] lut_data, inj_addr;
  logic [15:0] inj_data, cap_data, status = 16'h1234, errors = 16'h0042, dr_data = 16'hBEEF;
  logic [5:0] cap_idx;
  int n_start = 0, n_arm = 0;
  ecs_interface dut (.*);
  assign cap_data = {10'h2A5, cap_idx};
  always #4 clk = ~clk;
  always @(negedge clk) begin
    if (inj_start) n_start++;
    if (cap_arm) n_arm++;
  end
  `WATCHDOG(clk, 5000)
  task automatic bus_wr(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); addr = a; wdata = d; wr = 1;
    #1;
    `CHECK(lut_wr == (a[15:12] == 1 || a[15:12] == 2), "table write decode")
    if (lut_wr) `CHECK(lut_sel == (a[15:12] == 2) && lut_addr == a[11:0] && lut_data == d[7:0], "table port")
    `CHECK(inj_wr == (a[15:8] == 8'h30), "injection write decode")
    if (inj_wr) `CHECK(inj_addr == a[7:0] && inj_data == d, "injection port")
    @(negedge clk); wr = 0;
  endtask
  task automatic bus_rd(input logic [15:0] a, output logic [15:0] d);
    @(negedge clk); addr = a; rd = 1;
    #1;
    `CHECK(dr_pop == (a == 16'h0006), "pop strobe decode")
    @(negedge clk); rd = 0; d = rdata;
  endtask
  initial begin
    logic [15:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    `CHECK(cfg.align_delay == 4 && cfg.l0_latency == 105 && !cfg.test_mode &&
           cfg.foi_m2 == 3 && cfg.foi_m1 == 2 && cfg.foi_m4 == 1 && cfg.foi_m5 == 1 &&
           cfg.nb_mode_l == NBF_SAME && cfg.nb_mode_r == NBF_SAME, "reset configuration")
    bus_wr(16'h0001, 16'h2125); bus_rd(16'h0001, d);
    `CHECK(cfg.foi_m2 == 5 && cfg.foi_m1 == 2 && cfg.foi_m4 == 1 && cfg.foi_m5 == 2, "FOI fields")
    `CHECK(d == 16'h2125, "FOI read back")
    bus_wr(16'h0002, 16'h0007); bus_rd(16'h0002, d);
    `CHECK(cfg.align_delay == 7 && d == 7, "alignment delay")
    bus_wr(16'h0003, 16'h0064); bus_rd(16'h0003, d);
    `CHECK(cfg.l0_latency == 100 && d == 100, "latency")
    bus_wr(16'h0004, 16'h0009); bus_rd(16'h0004, d);
    `CHECK(cfg.nb_mode_l == NBF_COARSE && cfg.nb_mode_r == NBF_FINE && d == 9, "formatting modes")
    bus_wr(16'h0000, 16'h0007); bus_rd(16'h0000, d);
    `CHECK(cfg.test_mode && d == 1, "test mode")
    `CHECK(n_start == 1 && n_arm == 1, $sformatf("start and arm pulse once (%0d %0d)", n_start, n_arm))
    bus_wr(16'h0000, 16'h0000);
    `CHECK(!cfg.test_mode && n_start == 1, $sformatf("test mode off (%0d %0d)", cfg.test_mode, n_start))
    bus_rd(16'h0005, d); `CHECK(d == status, "status read")
    bus_rd(16'h0007, d); `CHECK(d == errors, "error read")
    bus_rd(16'h0006, d); `CHECK(d == dr_data, "derandomizer read")
    for (int i = 0; i < 34; i++) begin
      bus_rd(16'h4000 + 16'(i), d);
      `CHECK(d == {10'h2A5, 6'(i)}, "capture word read")
    end
    for (int i = 0; i < 50; i++) bus_wr(16'($urandom_range(16'h1000, 16'h30FF)), 16'($urandom));
    `FINISH
  end
endmodule
