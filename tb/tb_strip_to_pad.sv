// tb_strip_to_pad -- random strips and pads; in strip mode every logical pad
// must be the AND of its horizontal and vertical strip, in pad mode the
// pad map goes through unchanged.  One hit pad read out as strips must be
// rebuilt as exactly that pad.
`include "tb_check.svh"
module tb_strip_to_pad;
  int checks = 0, failures = 0;
  logic clk = 0, strip_mode;
  logic [3:0] h;
  logic [23:0] v;
  logic [3:0][23:0] pin, pads;
  strip_to_pad dut (.strip_mode, .hstrip(h), .vstrip(v), .pads_in(pin), .pads);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 5000)
  initial begin
    for (int n = 0; n < 2000; n++) begin
      strip_mode = n[0];
      h = 4'($urandom); v = 24'($urandom);
      for (int r = 0; r < 4; r++) pin[r] = 24'($urandom);
      #1;
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 24; c++)
          `CHECK(pads[r][c] == (strip_mode ? (h[r] && v[c]) : pin[r][c]),
                 $sformatf("pad %0d,%0d mode %0d", r, c, strip_mode))
    end
    strip_mode = 1; h = 4'b0100; v = 24'h000800; #1;
    `CHECK(pads == ((4'(1) << 2) != 0 ? (96'(1) << (2 * 24 + 11)) : '0), "single pad rebuilt")
    `FINISH
  end
endmodule
