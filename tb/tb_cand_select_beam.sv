// tb_cand_select_beam -- random sets of valid tracks among the 96 roads;
// the two registered candidates must be the two valid tracks of lowest pad
// number (nearest the beam), and dropped must be high when more than two
// tracks were found.
`include "tb_check.svh"
module tb_cand_select_beam;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, dropped;
  track_t [N_M3-1:0] tracks;
  track_t c0, c1;
  int idx [$];
  int n_drop = 0;
  cand_select_beam dut (.clk, .rst_n, .tracks, .c0, .c1, .dropped);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 10000)
  initial begin
    tracks = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int k;
      k = $urandom_range(0, 5);
      idx.delete();
      for (int i = 0; i < N_M3; i++) begin
        tracks[i] = track_t'($urandom);
        tracks[i].m3 = 7'(i);
        tracks[i].valid = 0;
      end
      for (int j = 0; j < k; j++) tracks[$urandom_range(0, N_M3 - 1)].valid = 1;
      for (int i = 0; i < N_M3; i++) if (tracks[i].valid) idx.push_back(i);
      @(negedge clk);
      `CHECK(c0 == (idx.size() > 0 ? tracks[idx[0]] : track_t'('0)), "first candidate")
      `CHECK(c1 == (idx.size() > 1 ? tracks[idx[1]] : track_t'('0)), "second candidate")
      `CHECK(dropped == (idx.size() > 2), "dropped flag")
      if (dropped) n_drop++;
    end
    `CHECK(n_drop > 100, "drops exercised")
    `FINISH
  end
endmodule
