// tb_l0mu_processor -- end-to-end test of a reduced crate: 1 x 2 processing
// boards (8 towers on a 2 x 4 grid) and the controller board.
//
// The testbench drives every optical link with the bytes of one 32-bit word
// per crossing, loads the pT tables of the eight units through the boards'
// control buses, and plays crossings that each exercise one mechanism.  The
// expected answers are computed here from the tower geometry.  Every
// mechanism counts in the final table and one that never happened counts a
// failure:
//   track        a single-tower track reaches the L0 decision unit words
//                (CU: pT and M3 pad; SU: board, PU, offsets, charge)
//   best2        tracks in three towers: the two of highest pT are sent
//   nb_x         a track whose M2 hit lies in the next tower along x
//   nb_y_board   a track whose M4/M5 hits lie in the tower above, on the
//                other board (backplane exchange)
//   fmt_switch   the same neighbour track after the neighbour's formatting
//                mode is switched to coarse pads: the M2 offset changes
//   dropped      three tracks in one tower: the unit flags a dropped one
//   l0_readout   Level-0 accepts: every unit's event (PU, BCSU, CU, SU)
//                reaches the DAQ streams with the accepted BCID
//   capture      the capture buffer of a unit holds an accepted event
//   injection    test mode: 16 injected events are read back through ECS
//   spyd         link-test frames: all controller inputs lock, see the right
//                emitter address and count no error
//   align_err    a too short alignment delay raises the sync error counters
`include "tb_check.svh"
module tb_l0mu_processor;
  import l0mu_pkg::*;
  localparam int NBX = 1, NBY = 2, NB = 2;
  int checks = 0, failures = 0;
  logic clk = 0, clk160 = 0, rst_n = 0, ttc_bc0 = 0, ttc_l0_accept = 0, spyd_mode = 0;
  logic [6:0] bcsu_lat = 104, cu_lat = 99, su_lat = 98;
  logic [3:0] align_delay = 13;     // candidate links: about 11 crossings of path
  logic [NB-1:0][3:0][7:0][7:0] rx_byte = '0;
  logic [NB-1:0][3:0][7:0] rx_first = '0;
  logic [NB-1:0][1:0] ecs_sel = '0;
  logic [NB-1:0][15:0] ecs_addr = '0, ecs_wdata = '0, ecs_rdata;
  logic [NB-1:0] ecs_wr = '0, ecs_rd = '0;
  logic [NB-1:0][3:0] align_err;
  ro_word_t [NB-1:0][1:0] daq_board;
  ro_word_t [1:0] daq_ctrl;
  logic [1:0][31:0] l0du_word;
  logic [1:0][15:0] sync_err;
  logic [2*NB-1:0] spyd_no_sync;
  logic [2*NB-1:0][15:0] spyd_errors;
  logic [2*NB-1:0][23:0] spyd_addr;

  l0mu_processor #(.NBX(NBX), .NBY(NBY)) dut (
    .clk, .clk160, .rst_n, .ttc_bc0, .ttc_l0_accept, .bcsu_l0_latency(bcsu_lat),
    .cu_l0_latency(cu_lat), .su_l0_latency(su_lat), .align_delay, .spyd_mode,
    .rx_clk({(NB * 32){clk160}}), .rx_byte, .rx_first, .ecs_sel, .ecs_addr, .ecs_wdata,
    .ecs_wr, .ecs_rd, .ecs_rdata, .align_err, .daq_board, .daq_board_ready('1),
    .daq_ctrl, .daq_ctrl_ready(2'b11), .l0du_word, .sync_err, .spyd_no_sync,
    .spyd_errors, .spyd_addr);

  always #1 clk160 = ~clk160;
  always #4 clk = ~clk;
  `WATCHDOG(clk, 200000)

  typedef enum int { M_TRACK, M_BEST2, M_NBX, M_NBY, M_FMT, M_DROP, M_L0, M_CAP, M_INJ,
                     M_SPYD, M_ALIGN, M_N } mech_t;
  int mech [M_N];
  string mname [M_N] = '{"track", "best2", "nb_x", "nb_y_board", "fmt_switch", "dropped",
                         "l0_readout", "capture", "injection", "spyd", "align_err"};

  logic [11:0] tb_bcid = 0;
  always @(posedge clk) if (rst_n) tb_bcid <= (tb_bcid == 3563) ? 0 : tb_bcid + 1;

  // link words of the next crossing, per board, PU, link
  logic [NB-1:0][3:0][7:0][31:0] cur = '0;
  logic [NB-1:0][3:0][7:0][31:0] sent [int];
  always @(posedge clk) if (rst_n) begin
    logic [NB-1:0][3:0][7:0][31:0] w;
    w = cur;
    for (int b = 0; b < NB; b++) for (int p = 0; p < 4; p++) for (int l = 0; l < 8; l++)
      w[b][p][l][31:28] = tb_bcid[3:0];
    sent[int'(tb_bcid)] = w;
    if (sent.exists(int'(tb_bcid) - 1000)) sent.delete(int'(tb_bcid) - 1000);
    for (int k = 0; k < 4; k++) begin
      @(posedge clk160);
      for (int b = 0; b < NB; b++) for (int p = 0; p < 4; p++) for (int l = 0; l < 8; l++)
        rx_byte[b][p][l] <= w[b][p][l][31 - 8 * k -: 8];
      rx_first <= (k == 0) ? '1 : '0;
    end
  end

  // ---------------------------------------------------------------- helpers
  // tower (gx, gy) -> board, PU
  function automatic int bo(input int gx, input int gy); return gy / 2; endfunction
  function automatic int pu(input int gx, input int gy); return (gy % 2) * 2 + gx; endfunction
  function automatic int ptv(input int b, input int p, input int col, input int d2, input int sel);
    return ((b * 4 + p) * 13 + col * 3 + (d2 + 5) * 7 + sel * 50) % 126 + 1;
  endfunction

  task automatic bus_wr(input int b, input int p, input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); ecs_sel[b] = 2'(p); ecs_addr[b] = a; ecs_wdata[b] = d; ecs_wr[b] = 1;
    @(negedge clk); ecs_wr[b] = 0;
  endtask
  task automatic bus_rd(input int b, input int p, input logic [15:0] a, output logic [15:0] d);
    @(negedge clk); ecs_sel[b] = 2'(p); ecs_addr[b] = a; ecs_rd[b] = 1;
    @(negedge clk); ecs_rd[b] = 0; d = ecs_rdata[b];
  endtask

  // add the hits of a track in tower (gx, gy), M3 pad (r, c), M2 offset d2
  // (may fall in the next tower along x), M4/M5 hits in row r4 (may be the
  // row above the tower) and column c/4
  task automatic add_track(input int gx, input int gy, input int r, input int c, input int d2,
                           input int r4);
    int b, p, c2, gx2, gy4, r4l;
    b = bo(gx, gy); p = pu(gx, gy);
    cur[b][p][LNK_M3][24 + r] = 1; cur[b][p][LNK_M3][c] = 1;
    c2 = c + d2; gx2 = gx;
    if (c2 > 23) begin c2 -= 24; gx2 = gx + 1; end
    cur[bo(gx2, gy)][pu(gx2, gy)][LNK_M2][24 + r] = 1;
    cur[bo(gx2, gy)][pu(gx2, gy)][LNK_M2][c2] = 1;
    gy4 = gy; r4l = r4;
    if (r4 > 3) begin r4l = r4 - 4; gy4 = gy + 1; end
    cur[bo(gx, gy4)][pu(gx, gy4)][LNK_M4][r4l * 6 + c / 4] = 1;
    cur[bo(gx, gy4)][pu(gx, gy4)][LNK_M5][r4l * 6 + c / 4] = 1;
  endtask

  // expected L0DU answer for a crossing
  typedef struct { int n; int pt [3]; int m3 [3]; int b [3]; int p [3]; int d2 [3]; } l0e_t;
  l0e_t want [int];
  task automatic expect_cand(input int x, input int gx, input int gy, input int r, input int c,
                             input int d2);
    int b, p, pt;
    b = bo(gx, gy); p = pu(gx, gy);
    pt = ptv(b, p, c, d2, 0);
    if (!want.exists(x)) want[x] = '{0, '{0, 0, 0}, '{0, 0, 0}, '{0, 0, 0}, '{0, 0, 0}, '{0, 0, 0}};
    want[x].pt[want[x].n] = pt; want[x].m3[want[x].n] = r * 24 + c;
    want[x].b[want[x].n] = b; want[x].p[want[x].n] = p; want[x].d2[want[x].n] = d2;
    want[x].n++;
  endtask

  // L0DU words: CU word for crossing x appears a fixed number of clocks
  // later; the words carry BCID bits, checked against the crossing.
  bit started = 0;
  int seen_x [int];
  always @(negedge clk) if (rst_n && !spyd_mode && started) begin
    logic [31:0] cw, sw;
    cw = l0du_word[0];
    if (cw[13:7] != 0) begin
      // find the crossing: the most recent expected one with these BCID bits
      int x = -1;
      foreach (want[k]) if (4'(k) == cw[31:28] && int'(tb_bcid) - k < 40 && int'(tb_bcid) > k) x = k;
      `CHECK(x >= 0, $sformatf("L0DU word %h without an expected crossing", cw))
      if (x >= 0 && !seen_x.exists(x)) begin
        int i0, i1;
        seen_x[x] = 1;
        i0 = 0;
        for (int j = 1; j < want[x].n; j++) if (want[x].pt[j] > want[x].pt[i0]) i0 = j;
        i1 = (i0 == 0) ? 1 : 0;
        for (int j = 0; j < want[x].n; j++) if (j != i0 && want[x].pt[j] > want[x].pt[i1]) i1 = j;
        `CHECK(int'(cw[13:7]) == want[x].pt[i0] && int'(cw[6:0]) == want[x].m3[i0],
               $sformatf("crossing %0d best candidate pT %0d pad %0d", x, cw[13:7], cw[6:0]))
        if (want[x].n > 1) begin
          `CHECK(int'(cw[27:21]) == want[x].pt[i1] && int'(cw[20:14]) == want[x].m3[i1],
                 "second best candidate")
        end else `CHECK(cw[27:21] == 0, "no second candidate")
        // the SU word follows one clock later
        @(negedge clk);
        sw = l0du_word[1];
        `CHECK(sw[14] && int'(sw[13:10]) == want[x].b[i0] && int'(sw[9:8]) == want[x].p[i0] &&
               int'($signed(sw[7:4])) == want[x].d2[i0],
               $sformatf("SU word %h for crossing %0d (board %0d PU %0d d2 %0d)", sw, x,
                         want[x].b[i0], want[x].p[i0], want[x].d2[i0]))
        if (want[x].n == 1 && want[x].d2[0] == 0 && want[x].b[0] == 0) mech[M_TRACK]++;
        if (want[x].n == 3) mech[M_BEST2]++;
      end
    end
  end

  // DAQ streams: collect events, check BCIDs
  int acc_x [$];
  int n_ev [6];
  task automatic collect(input ro_word_t w, input int s, inout int wi, inout logic [1599:0] buf_);
    if (w.valid) begin
      buf_[1599 - 16 * wi -: 16] = w.data;
      wi++;
      if (w.last) begin
        n_ev[s]++;
        wi = 0;
      end
    end
  endtask
  int wi_b [NB][2], wi_c [2];
  logic [1599:0] eb [NB][2], ec [2];
  int acc_seen [int];
  always @(negedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < 2; k++) if (daq_board[b][k].valid) begin
        collect(daq_board[b][k], k, wi_b[b][k], eb[b][k]);
        if (wi_b[b][k] == 0) begin
          // board fragment: link 0 = PU0, PU1 (34 words each); link 1 = PU2,
          // PU3 (34 each) and the BCSU (22)
          int x0, x1, xb;
          x0 = int'(eb[b][k][1599 -: 12]);
          x1 = int'(eb[b][k][1599 - 544 -: 12]);
          `CHECK(x0 == x1, $sformatf("board %0d link %0d: PU BCIDs %0d %0d", b, k, x0, x1))
          `CHECK(acc_seen.exists(x0), $sformatf("PU event of crossing %0d was accepted", x0))
          if (acc_seen.exists(x0))
            `CHECK(eb[b][k][1599 - 12 -: 256] == sent[x0][b][2 * k + 1] ||
                   eb[b][k][1599 - 12 -: 256] == sent[x0][b][2 * k],
                   $sformatf("PU event of %0d holds its link words %h %h", x0, eb[b][k][1599 - 12 -: 256], sent[x0][b][2 * k]))
          if (k == 1) begin
            xb = int'(eb[b][k][1599 - 1088 -: 12]);
            `CHECK(xb == x0, $sformatf("BCSU event BCID %0d expected %0d", xb, x0))
          end
          if (b == 0 && k == 1 && acc_seen.exists(x0)) mech[M_L0]++;
        end
      end
    for (int k = 0; k < 2; k++) if (daq_ctrl[k].valid) begin
      collect(daq_ctrl[k], 2 + k, wi_c[k], ec[k]);
      if (wi_c[k] == 0)
        `CHECK(acc_seen.exists(int'(ec[k][1599 -: 12])),
               $sformatf("%s event BCID %0d was accepted", k == 0 ? "CU" : "SU", ec[k][1599 -: 12]))
    end
  end

  // Level-0 accept for crossing x: sent when its PU records leave the L0
  // buffers (the PU pipeline is its align delay 4 + 6 clocks, the L0 latency
  // 105)
  task automatic accept_at(input int x);
    acc_seen[x] = 1;
    while (int'(tb_bcid) != (x + 4 + 6 + 105 - 1) % 3564) @(negedge clk);
    ttc_l0_accept = 1;
    @(negedge clk);
    ttc_l0_accept = 0;
  endtask

  task automatic crossing_gap(input int n);
    @(negedge clk); cur = '0;
    repeat (n) @(negedge clk);
  endtask

  initial begin
    logic [15:0] d;
    int x;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // pT tables: entries {column, d2, d1 = 0}; both boards loaded in parallel
    for (int p = 0; p < 4; p++)
      for (int s = 0; s < 2; s++)
        for (int c = 0; c < 24; c++)
          for (int d2 = -3; d2 <= 3; d2++) begin
            fork
              bus_wr(0, p, 16'((s + 1) * 4096) + {5'(c), 4'(d2), 3'd0}, 16'(ptv(0, p, c, d2, s)));
              bus_wr(1, p, 16'((s + 1) * 4096) + {5'(c), 4'(d2), 3'd0}, 16'(ptv(1, p, c, d2, s)));
            join
          end
    repeat (50) @(negedge clk);
    started = 1;

    // single tracks in each tower
    for (int t = 0; t < 8; t++) begin
      @(negedge clk);
      cur = '0;
      add_track(t % 2, t / 2, 1, 10, 0, 1);
      expect_cand(int'(tb_bcid), t % 2, t / 2, 1, 10, 0);
      crossing_gap(30);
    end
    // three towers: the two highest pT win
    @(negedge clk);
    cur = '0;
    add_track(0, 0, 2, 5, 0, 2);  expect_cand(int'(tb_bcid), 0, 0, 2, 5, 0);
    add_track(1, 2, 0, 12, 0, 0); expect_cand(int'(tb_bcid), 1, 2, 0, 12, 0);
    add_track(0, 3, 3, 20, 0, 3); expect_cand(int'(tb_bcid), 0, 3, 3, 20, 0);
    crossing_gap(30);
    // neighbour along x: M2 hit in the next tower (d2 = +2)
    @(negedge clk);
    cur = '0;
    add_track(0, 1, 2, 22, 2, 2); expect_cand(int'(tb_bcid), 0, 1, 2, 22, 2);
    x = int'(tb_bcid);
    crossing_gap(30);
    if (seen_x.exists(x)) mech[M_NBX]++;
    // neighbour along y on the other board: M4/M5 in row 0 of the tower above
    @(negedge clk);
    cur = '0;
    add_track(1, 1, 3, 9, 0, 4); expect_cand(int'(tb_bcid), 1, 1, 3, 9, 0);
    x = int'(tb_bcid);
    crossing_gap(30);
    if (seen_x.exists(x)) mech[M_NBY]++;
    // neighbour's formatting switched to coarse pads: M2 pad 1 of the next
    // tower is merged with pad 0 into extension pad 0, so d2 becomes +2
    // instead of +3
    bus_wr(bo(1, 1), pu(1, 1), 16'h0004, 16'h0001);
    @(negedge clk);
    cur = '0;
    add_track(0, 1, 2, 22, 3, 2); expect_cand(int'(tb_bcid), 0, 1, 2, 22, 2);
    x = int'(tb_bcid);
    crossing_gap(30);
    if (seen_x.exists(x)) mech[M_FMT]++;
    bus_wr(bo(1, 1), pu(1, 1), 16'h0004, 16'h0000);
    // three tracks in one tower: two kept, one dropped
    @(negedge clk);
    cur = '0;
    add_track(1, 0, 1, 4, 0, 1); add_track(1, 0, 1, 12, 0, 1); add_track(1, 0, 1, 20, 0, 1);
    crossing_gap(30);
    bus_rd(0, 1, 16'h0005, d);
    `CHECK(d[6], "dropped candidate flagged in status")
    if (d[6]) mech[M_DROP]++;

    // Level-0 accepts, with capture armed in board 1 PU 2
    bus_wr(1, 2, 16'h0000, 16'h0004);
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      cur = '0;
      add_track(k % 2, 1 + k % 3, 1, 6 + k, 0, 1);
      x = int'(tb_bcid);
      crossing_gap(2);
      accept_at(x);
      if (k == 0) begin
        logic [15:0] cw [34];
        bus_rd(1, 2, 16'h0005, d);
        `CHECK(d[1], "capture done")
        for (int i = 0; i < 34; i++) bus_rd(1, 2, 16'h4000 + 16'(i), cw[i]);
        `CHECK(int'(cw[0][15:4]) == x, $sformatf("captured BCID %0d expected %0d", cw[0][15:4], x))
        if (d[1] && int'(cw[0][15:4]) == x) mech[M_CAP]++;
      end
    end
    repeat (400) @(negedge clk);
    `CHECK(n_ev[0] == 6 * NB && n_ev[1] == 6 * NB, $sformatf("board events %0d %0d", n_ev[0], n_ev[1]))
    `CHECK(n_ev[2] == 6 && n_ev[3] == 6, $sformatf("controller events %0d %0d", n_ev[2], n_ev[3]))

    // injection test mode in board 0, PU 3
    for (int k = 0; k < 16; k++)
      for (int l = 0; l < 8; l++) begin
        bus_wr(0, 3, 16'h3000 + 16'(k * 16 + l * 2), 16'(k * 8 + l));
        bus_wr(0, 3, 16'h3000 + 16'(k * 16 + l * 2 + 1), {4'(k), 12'h0});
      end
    bus_wr(0, 3, 16'h0000, 16'h0001);
    bus_wr(0, 3, 16'h0000, 16'h0003);
    repeat (200) @(negedge clk);
    begin
      int ok = 0;
      for (int k = 0; k < 16; k++) begin
        logic [15:0] w [34];
        for (int i = 0; i < 34; i++) bus_rd(0, 3, 16'h0006, w[i]);
        // word 0 = BCID(12) + link 7 bits 31:28; word 2 = link 7 bits 11:0
        if (w[0][3:0] == 4'(k) && w[2][15:4] == 12'(k * 8 + 7)) ok++;
      end
      `CHECK(ok == 16, $sformatf("%0d of 16 injected events read back", ok))
      if (ok == 16) mech[M_INJ]++;
    end
    bus_wr(0, 3, 16'h0000, 16'h0000);

    // alignment error: delay 8 is shorter than the candidate link path
    begin
      logic [15:0] e0, e1;
      e0 = sync_err[0];
      align_delay = 8;
      repeat (50) @(negedge clk);
      align_delay = 13;
      repeat (20) @(negedge clk);
      e1 = sync_err[0];
      `CHECK(e1 > e0 + 20, $sformatf("sync errors %0d -> %0d", e0, e1))
      if (e1 > e0 + 20) mech[M_ALIGN]++;
    end

    // Spyd link test
    spyd_mode = 1;
    repeat (3 * 2048) @(negedge clk);
    begin
      bit ok = 1;
      for (int b = 0; b < NB; b++)
        for (int k = 0; k < 2; k++) begin
          `CHECK(!spyd_no_sync[k * NB + b] && spyd_errors[k * NB + b] == 0,
                 $sformatf("Spyd board %0d link %0d: no_sync %0d errors %0d", b, k,
                           spyd_no_sync[k * NB + b], spyd_errors[k * NB + b]))
          `CHECK(spyd_addr[k * NB + b] == {8'(b), 8'd4, 8'(k)},
                 $sformatf("Spyd address %h", spyd_addr[k * NB + b]))
          if (spyd_no_sync[k * NB + b] || spyd_errors[k * NB + b] != 0 ||
              spyd_addr[k * NB + b] != {8'(b), 8'd4, 8'(k)}) ok = 0;
        end
      if (ok) mech[M_SPYD]++;
    end
    spyd_mode = 0;
    repeat (50) @(negedge clk);

    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-11s %0d", mname[m], mech[m]);
      `CHECK(mech[m] > 0, $sformatf("mechanism %s never happened", mname[m]))
    end
    `FINISH
  end
endmodule
