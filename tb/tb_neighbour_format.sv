// tb_neighbour_format -- random 12-bit edge columns formatted to 8 columns in
// the three modes (same granularity, receiver pads twice as wide, half as
// wide); checks every output bit against the pad geometry computed here:
// an output pad is hit when any input pad overlapping it in x is hit.
`include "tb_check.svh"
module tb_neighbour_format;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [1:0] mode;
  logic [11:0] din;
  logic [7:0] dout, e;
  neighbour_format #(.N_IN(12), .N_OUT(8)) dut (.mode, .din, .dout);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 5000)
  // output pad k covers [k*wo, (k+1)*wo) and input pad i covers [i*wi, (i+1)*wi)
  // in units of a quarter of an input pad
  function automatic logic [7:0] expect_of(input logic [1:0] m, input logic [11:0] v);
    int wo;
    logic [7:0] r = '0;
    wo = (m == NBF_COARSE) ? 8 : (m == NBF_FINE) ? 2 : 4;
    for (int k = 0; k < 8; k++)
      for (int i = 0; i < 12; i++)
        if (v[i] && i * 4 < (k + 1) * wo && k * wo < (i + 1) * 4) r[k] = 1'b1;
    return r;
  endfunction
  initial begin
    for (int n = 0; n < 3000; n++) begin
      mode = 2'(n % 3);
      din  = 12'($urandom);
      if (n % 7 == 0) din = 12'(1) << $urandom_range(0, 11);
      #1;
      e = expect_of(mode, din);
      `CHECK(dout == e, $sformatf("mode %0d din %h dout %h expected %h", mode, din, dout, e))
    end
    `FINISH
  end
endmodule
