// tb_l0_buffer -- random words written every clock; for several latencies
// (including the paper's 105 crossings and the largest, 127) the output must
// be the word written `latency` clocks before the current one.
`include "tb_check.svh"
module tb_l0_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [39:0] din = 0, dout;
  logic [6:0] lat = 105;
  logic [39:0] hist [$];
  l0_buffer #(.DW(40), .DEPTH(128)) dut (.clk, .rst_n, .din, .latency(lat), .dout);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 20000)
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      lat = (s == 0) ? 105 : (s == 1) ? 127 : (s == 2) ? 3 : 50;
      for (int n = 0; n < 400; n++) begin
        din = {8'(s), 32'($urandom)};
        hist.push_front(din);
        @(negedge clk);
        if (n > 130)
          `CHECK(dout == hist[lat], $sformatf("latency %0d output", lat))
      end
    end
    `FINISH
  end
endmodule
