// tb_spyd_tx -- follows two and a half frames of the emitter and checks each
// word against the frame format rebuilt here: four 3'b111 tags, the 24-bit
// address in 3-bit slices, then the replicated 6-bit counter; frame_start on
// word 0; the emitter holds still while en is low.
`include "tb_check.svh"
module tb_spyd_tx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, fs;
  logic [31:0] word, e;
  logic [23:0] a = 24'hA5C31E;
  int pos = 0, nfs = 0;
  spyd_tx dut (.clk, .rst_n, .en, .slot(a[23:16]), .fpga(a[15:8]), .port(a[7:0]),
               .word, .frame_start(fs));
  always #4 clk = ~clk;
  `WATCHDOG(clk, 20000)
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5200; n++) begin
      logic [31:0] prev;
      prev = word;
      en = (n % 13 != 5);
      @(negedge clk);
      if (!en) `CHECK(word == prev, "holds while disabled")
      else begin
        e = '0;
        if (pos < 4) e[2:0] = 3'b111;
        else if (pos < 12) e[2:0] = a[3 * (pos - 4) +: 3];
        else for (int i = 0; i < 32; i++) e[i] = 6'((pos - 12) % 64) >> (i % 6);
        `CHECK(word == e, $sformatf("frame word %0d: %h expected %h", pos, word, e))
        `CHECK(fs == (pos == 0), "frame start")
        if (fs) nfs++;
        pos = (pos + 1) % 2048;
      end
    end
    `CHECK(nfs == 3, "three frame starts")
    `FINISH
  end
endmodule
