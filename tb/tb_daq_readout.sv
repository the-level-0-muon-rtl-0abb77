// tb_daq_readout -- three sources each offering events of 4 words (source
// 0), 6 words (1) and 2 words (2) with random gaps and a random link ready;
// the output must carry, for every event, the words of source 0, then 1,
// then 2, with one last flag at the very end, and each source must be
// drained exactly once per event.
`include "tb_check.svh"
module tb_daq_readout;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, oready = 0;
  ro_word_t [2:0] src;
  logic [2:0] sready;
  ro_word_t out;
  int len [3] = '{4, 6, 2};
  int wi [3] = '{0, 0, 0}, ev [3] = '{0, 0, 0};
  int oev = 0, ow = 0, gap [3] = '{0, 0, 0};
  daq_readout #(.N(3)) dut (.clk, .rst_n, .src, .src_ready(sready), .out, .out_ready(oready));
  always #4 clk = ~clk;
  `WATCHDOG(clk, 40000)
  function automatic logic [15:0] wv(input int s, input int e, input int w);
    return 16'(s * 4096 + (e % 256) * 16 + w);
  endfunction
  always_comb
    for (int s = 0; s < 3; s++) begin
      src[s].valid = rst_n && gap[s] == 0 && ev[s] < 200;
      src[s].last  = wi[s] == len[s] - 1;
      src[s].data  = wv(s, ev[s], wi[s]);
    end
  always @(posedge clk) if (rst_n) begin
    // output check, in the expected order
    if (out.valid && oready) begin
      int s, w, acc;
      acc = 0; s = 0;
      while (ow >= acc + len[s]) begin acc += len[s]; s++; end
      w = ow - acc;
      `CHECK(out.data == wv(s, oev, w), $sformatf("event %0d word %0d: %h", oev, ow, out.data))
      `CHECK(out.last == (ow == 11), "last flag")
      if (ow == 11) begin ow <= 0; oev <= oev + 1; end
      else ow <= ow + 1;
    end
    for (int s = 0; s < 3; s++) begin
      if (src[s].valid && sready[s]) begin
        if (wi[s] == len[s] - 1) begin
          wi[s] <= 0; ev[s] <= ev[s] + 1; gap[s] <= $urandom_range(0, 8);
        end else wi[s] <= wi[s] + 1;
      end else if (gap[s] > 0) gap[s] <= gap[s] - 1;
    end
    oready <= ($urandom_range(0, 4) != 0);
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (8000) @(negedge clk);
    `CHECK(oev == 200, $sformatf("%0d events read out", oev))
    `CHECK(ev[0] == 200 && ev[1] == 200 && ev[2] == 200, "every source drained")
    `FINISH
  end
endmodule
