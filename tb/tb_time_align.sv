// tb_time_align -- two links with different path delays (3 and 6 crossings)
// write their words, tagged with BCID bits, through 160 MHz write clocks; the
// read side must deliver on every crossing the word of crossing
// sys_bcid - delay for both links, without errors, when delay covers the
// slower link, and must flag the slow link when the delay is shortened.
`include "tb_check.svh"
module tb_time_align;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk160 = 0, rst_n = 0;
  logic [11:0] sys_bcid = 0;
  logic [3:0] delay = 7;
  logic [1:0] we = 0;
  logic [1:0][31:0] wdata = 0;
  logic [1:0][31:0] rdata;
  logic [1:0][11:0] rbcid;
  logic [1:0] err;
  int path [2] = '{3, 6};
  int nerr;
  for (genvar i = 0; i < 2; i++) begin : g
    time_align dut (.wclk(clk160), .we(we[i]), .wdata(wdata[i]), .clk, .rst_n, .sys_bcid,
                    .delay, .rdata(rdata[i]), .rbcid(rbcid[i]), .err(err[i]));
  end
  always #1 clk160 = ~clk160;
  always #4 clk = ~clk;
  always @(posedge clk) sys_bcid <= (sys_bcid == 3563) ? 0 : sys_bcid + 1;
  function automatic logic [27:0] payload(input int link, input logic [11:0] b);
    return 28'(b * 7 + link * 1000 + 5);
  endfunction
  // the links: a word for crossing b is written path[i] crossings later,
  // in the middle of a crossing (a different phase of the 160 MHz clock)
  for (genvar i = 0; i < 2; i++) begin : g_src
    always @(posedge clk) begin
      logic [11:0] b;
      b = bcid_sub(sys_bcid, path[i]);
      repeat (1 + i) @(posedge clk160);
      wdata[i] <= {b[3:0], payload(i, b)};
      we[i] <= 1;
      @(posedge clk160);
      we[i] <= 0;
    end
  end
  `WATCHDOG(clk, 20000)
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (30) @(posedge clk);
    for (int n = 0; n < 4000; n++) begin          // crosses an orbit boundary
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        `CHECK(rbcid[i] == bcid_sub(sys_bcid, int'(delay) + 1), "rbcid follows sys_bcid - delay")
        `CHECK(rdata[i] == {rbcid[i][3:0], payload(i, rbcid[i])},
               $sformatf("link %0d word of crossing %0d", i, rbcid[i]))
        `CHECK(!err[i], "no alignment error")
      end
    end
    // a delay shorter than the slow link's path must be reported
    delay = 5;
    repeat (3) @(negedge clk);
    nerr = 0;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      if (err[1]) nerr++;
      `CHECK(!err[0], "fast link still aligned")
    end
    `CHECK(nerr > 40, $sformatf("slow link flagged late (%0d errors)", nerr))
    `FINISH
  end
endmodule
