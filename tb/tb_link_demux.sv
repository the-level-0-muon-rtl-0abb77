// tb_link_demux -- sends random 32-bit words as four bytes (most significant
// first, rx_first on byte 0) and checks each rebuilt word and its strobe,
// which must come one clock after the fourth byte; a stray idle byte with
// no rx_first must not produce a word.
`include "tb_check.svh"
module tb_link_demux;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, first = 0;
  logic [7:0] b = 0;
  logic [31:0] word, w;
  logic stb;
  int nstb = 0;
  link_demux dut (.clk160(clk), .rst_n, .rx_byte(b), .rx_first(first), .word, .word_stb(stb));
  always #1 clk = ~clk;
  `WATCHDOG(clk, 5000)
  always @(posedge clk) if (rst_n && stb) nstb++;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // idle bytes without a first marker
    @(negedge clk); b = 8'h55; first = 0;
    @(negedge clk); b = 8'h66;
    for (int n = 0; n < 200; n++) begin
      w = $urandom;
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        b = w[31 - 8 * k -: 8];
        first = (k == 0);
      end
      @(negedge clk);
      first = 0; b = 8'hEE;
      `CHECK(stb == 1'b1, "strobe one clock after byte 3")
      `CHECK(word == w, $sformatf("word %h expected %h", word, w))
      if (n % 3 == 0) begin                    // one idle byte between words
        @(negedge clk);
        `CHECK(stb == 1'b0, "no strobe on idle")
      end
    end
    @(negedge clk);
    `CHECK(nstb == 200, $sformatf("%0d strobes, expected 200", nstb))
    `FINISH
  end
endmodule
