// tb_injection_buffer -- loads 16 random events of 8 link words through the
// 16-bit write port, starts a replay and checks that every event comes out
// once, in order, one per clock, with active and the event number; a second
// start during the replay must be ignored, and the block must be idle after.
`include "tb_check.svh"
module tb_injection_buffer;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0;
  logic [7:0] wr_addr = 0;
  logic [15:0] wr_data = 0;
  logic [7:0][31:0] words;
  logic active;
  logic [3:0] ev;
  logic [7:0][31:0] ref_ev [16];
  injection_buffer dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .start, .words, .active, .ev);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 5000)
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 16; e++)
      for (int l = 0; l < 8; l++) begin
        ref_ev[e][l] = $urandom;
        for (int h = 0; h < 2; h++) begin
          @(negedge clk);
          wr_en = 1; wr_addr = {4'(e), 3'(l), 1'(h)}; wr_data = ref_ev[e][l][16 * h +: 16];
        end
      end
    @(negedge clk); wr_en = 0;
    repeat (3) begin
      @(negedge clk);
      `CHECK(!active, "idle before start")
    end
    start = 1;
    @(negedge clk); start = 0;
    for (int e = 0; e < 16; e++) begin
      @(negedge clk);
      if (e == 5) start = 1;                 // ignored while running
      else start = 0;
      `CHECK(active, $sformatf("active during event %0d", e))
      `CHECK(ev == 4'(e), $sformatf("event number %0d expected %0d", ev, e))
      `CHECK(words == ref_ev[e], $sformatf("words of event %0d", e))
    end
    start = 0;
    repeat (5) begin
      @(negedge clk);
      `CHECK(!active, "idle after 16 events")
    end
    `FINISH
  end
endmodule
