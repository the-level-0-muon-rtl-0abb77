// tb_capture_buffer -- pushes events every clock; after arm, the first event
// pushed must be frozen (done set) and readable word by word, later pushes
// must not change it, and a new arm must capture a new event.
`include "tb_check.svh"
module tb_capture_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, arm = 0, push = 0, done;
  logic [543:0] ev = 0, snap;
  logic [5:0] idx = 0;
  logic [15:0] rd;
  capture_buffer dut (.clk, .rst_n, .arm, .push, .ev, .done, .rd_idx(idx), .rd_data(rd));
  always #4 clk = ~clk;
  `WATCHDOG(clk, 10000)
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5; k++) begin
      arm = 1; @(negedge clk); arm = 0;
      `CHECK(!done, "done cleared by arm")
      repeat ($urandom_range(0, 5)) @(negedge clk);
      for (int i = 0; i < 17; i++) ev[32 * i +: 32] = $urandom;
      snap = ev; push = 1;
      @(negedge clk);
      `CHECK(done, "done after the push")
      for (int n = 0; n < 7; n++) begin
        ev = ~ev; @(negedge clk);
      end
      push = 0;
      for (int i = 0; i < 34; i++) begin
        idx = 6'(i); #1;
        `CHECK(rd == snap[543 - 16 * i -: 16], $sformatf("captured word %0d", i))
      end
    end
    `FINISH
  end
endmodule
