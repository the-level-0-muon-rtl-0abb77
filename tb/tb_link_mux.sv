// tb_link_mux -- loads random words once every four clocks and checks the
// four bytes that follow (most significant first, tx_first on the first),
// and that the line carries 0 when no word is loaded.
`include "tb_check.svh"
module tb_link_mux;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, stb = 0, first;
  logic [31:0] w = 0;
  logic [7:0] b;
  link_mux dut (.clk160(clk), .rst_n, .word(w), .word_stb(stb), .tx_byte(b), .tx_first(first));
  always #1 clk = ~clk;
  `WATCHDOG(clk, 5000)
  initial begin
    logic [31:0] cur;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      cur = $urandom; w = cur; stb = 1;
      @(negedge clk);
      stb = 0; w = $urandom;               // input may change after the strobe
      for (int k = 0; k < 4; k++) begin
        `CHECK(b == cur[31 - 8 * k -: 8], $sformatf("byte %0d of word %0d", k, n))
        `CHECK(first == (k == 0), "tx_first on byte 0 only")
        if (k < 3) @(negedge clk);
      end
    end
    repeat (2) @(negedge clk);
    `CHECK(b == 0 && !first, "idle line")
    `FINISH
  end
endmodule
