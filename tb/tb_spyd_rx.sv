// tb_spyd_rx -- feeds the receiver with frames built here (independently of
// the emitter) on a 32-bit bus: it must lock on the header, report the
// emitter address, count no errors on clean frames, count every corrupted
// data word, set the sticky no_sync flag when a header is broken, and clear
// its counters on request.
`include "tb_check.svh"
module tb_spyd_rx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, clear = 0, synced, no_sync;
  logic [31:0] word = 0;
  logic [15:0] errors;
  logic [23:0] addr;
  logic [23:0] a = 24'h3C1F07;
  int pos = 0;
  spyd_rx dut (.clk, .rst_n, .en, .word, .clear, .synced, .no_sync, .errors, .addr);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 40000)
  function automatic logic [31:0] fw(input int p);
    logic [31:0] v = '0;
    if (p < 4) v[2:0] = 3'b111;
    else if (p < 12) v[2:0] = a[3 * (p - 4) +: 3];
    else for (int i = 0; i < 32; i++) v[i] = 6'((p - 12) % 64) >> (i % 6);
    return v;
  endfunction
  // send n words; corrupt data word positions listed in bad, header word hb
  task automatic send(input int n, input int bad [$], input int hb);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      en = 1;
      word = fw(pos);
      foreach (bad[i]) if (bad[i] == pos) word[17] = ~word[17];
      if (pos == hb) word[0] = 1'b0;
      pos = (pos + 1) % 2048;
    end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    pos = 1500;                                   // start in the middle of a frame
    send(548 + 2048 + 20, {-5}, -1);
    @(negedge clk);
    en = 0;
    `CHECK(synced && !no_sync, "locked on the header")
    `CHECK(addr == a, $sformatf("emitter address %h", addr))
    `CHECK(errors == 0, $sformatf("no errors on clean frames (%0d)", errors))
    send(2048, {100, 200, 1500}, -1);
    @(negedge clk);
    en = 0;
    `CHECK(errors == 3, $sformatf("three corrupted words counted (%0d)", errors))
    clear = 1; @(negedge clk); clear = 0;
    `CHECK(errors == 0, "errors cleared")
    while (pos != 0) send(1, {-5}, -1);
    send(2048, {-5}, 2);                            // broken synchronisation word
    send(2048 + 20, {-5}, -1);
    @(negedge clk);
    en = 0;
    `CHECK(no_sync, "sticky loss of synchronisation")
    `CHECK(synced, "locked again on the next header")
    clear = 1; @(negedge clk); clear = 0;
    send(2048, {-5}, -1);
    @(negedge clk);
    en = 0;
    `CHECK(!no_sync && errors == 0, "clean after clear")
    `FINISH
  end
endmodule
