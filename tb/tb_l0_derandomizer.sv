// tb_l0_derandomizer -- pushes 544-bit events at random times and reads them
// back word by word; checks the 34 words of every event in order (most
// significant first, last flag on word 33), the event rate of one word per
// clock, the full flag and the loss count when accepts come faster than the
// readout.  A reference FIFO written here models the expected contents.
`include "tb_check.svh"
module tb_l0_derandomizer;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, ready = 1;
  logic [543:0] ev = 0;
  ro_word_t out;
  logic [4:0] count;
  logic full;
  logic [15:0] lost;
  logic [543:0] q [$];
  int nlost = 0, nev = 0, wi = 0, nfull = 0;
  l0_derandomizer dut (.clk, .rst_n, .push, .ev, .out, .out_ready(ready), .count, .full, .lost);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 100000)
  // reference: compare every word consumed
  always @(posedge clk) if (rst_n) begin
    if (out.valid && ready) begin
      `CHECK(q.size() > 0, "word without event")
      if (q.size() > 0) begin
        `CHECK(out.data == q[0][543 - 16 * wi -: 16], $sformatf("word %0d of event %0d", wi, nev))
        `CHECK(out.last == (wi == 33), "last flag")
        if (wi == 33) begin wi = 0; nev++; void'(q.pop_front()); end
        else wi++;
      end
    end
    if (push) begin
      if (q.size() < 16) q.push_back(ev);
    end
  end
  task automatic do_push();
    ev = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
          $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
          $urandom, 32'($urandom)};
    if (full) nlost++;
    if (full) nfull++;
    push = 1;
    @(negedge clk);
    push = 0;
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // one event: words come out on consecutive clocks
    do_push();
    repeat (34) begin
      `CHECK(out.valid, "continuous readout of one event")
      @(negedge clk);
    end
    `CHECK(!out.valid && count == 0, "empty after 34 words")
    // burst of 20 accepts, 3 crossings apart: FIFO fills and 4 get lost
    ready = 0;
    for (int n = 0; n < 20; n++) begin do_push(); repeat (2) @(negedge clk); end
    `CHECK(full, "full after a burst")
    `CHECK(lost == 16'(nlost), $sformatf("lost %0d expected %0d", lost, nlost))
    ready = 1;
    // random accepts with a random ready
    for (int n = 0; n < 20000; n++) begin
      ready = ($urandom_range(0, 9) != 0);
      if ($urandom_range(0, 39) == 0) do_push();
      else @(negedge clk);
    end
    ready = 1;
    repeat (600) @(negedge clk);
    `CHECK(lost == 16'(nlost), "lost count")
    `CHECK(q.size() == 0 && !out.valid, "all events read")
    `CHECK(nev > 300 && nfull > 3, $sformatf("%0d events read", nev))
    `FINISH
  end
endmodule
