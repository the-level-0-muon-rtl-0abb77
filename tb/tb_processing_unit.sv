// tb_processing_unit -- one processing unit fed through its eight links.
//
// The testbench loads both pT tables through the control bus, then sends one
// crossing of link bytes per clock at 160 MHz.  Random crossings carry one
// muon track (M3 pad and M2 pad as crossed strips, M1, M4 and M5 pads) with
// random M2 and M1 offsets inside the default fields of interest, plus
// isolated noise hits far from it.  Checked against values computed here:
//   - the first candidate of each track crossing (pad, offsets, pT and charge
//     from the table contents), found by its BCID on cand_bcid; crossings
//     without a track give no candidate;
//   - three tracks in one crossing: the two nearest the beam are kept;
//   - Level-0 accepts sent when a crossing leaves the L0 buffer (latency
//     105 crossings): the 34-word readout event carries the BCID, the link words and
//     the candidate of that crossing;
//   - the border pads sent to the neighbours;
//   - an alignment delay too short raises the error counter;
//   - test mode: 16 events loaded in the injection buffer are replayed,
//     accept themselves and are read back through the control bus.
`include "tb_check.svh"
module tb_processing_unit;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk160 = 0, rst_n = 0, bc0 = 0, l0_accept = 0, ro_ready = 1;
  logic [7:0] rx_first = 0;
  logic [7:0][7:0] rx_byte = '0;
  nb_t nb_in = '0, nb_out;
  cand_t cand0, cand1;
  logic [11:0] cand_bcid;
  ro_word_t ro;
  logic [15:0] ecs_addr = 0, ecs_wdata = 0, ecs_rdata;
  logic ecs_wr = 0, ecs_rd = 0, align_err;
  processing_unit dut (.clk, .rst_n, .bc0, .l0_accept, .rx_clk({8{clk160}}), .rx_byte,
                       .rx_first, .nb_in, .nb_out, .cand0, .cand1, .cand_bcid, .ro, .ro_ready,
                       .ecs_addr, .ecs_wdata, .ecs_wr, .ecs_rd, .ecs_rdata, .align_err);
  always #1 clk160 = ~clk160;
  always #4 clk = ~clk;
  `WATCHDOG(clk, 60000)

  logic [7:0] lut [2][4096];
  logic [11:0] tb_bcid = 0;
  logic [7:0][31:0] sent [int];          // link words by crossing
  typedef struct { bit valid; int m3; int d2; int d1; bit m1; } exp_t;
  exp_t exp_c [int], exp_c1 [int];
  logic [7:0][31:0] cur = '0;            // words for the next crossing
  int n_cand = 0, n_acc = 0, n_ro = 0, n_none = 0, n_two = 0;

  always @(posedge clk) if (rst_n) tb_bcid <= (tb_bcid == 3563) ? 0 : tb_bcid + 1;

  // link drivers: the words of crossing tb_bcid, four bytes on the following
  // 160 MHz edges (the first four of the crossing)
  always @(posedge clk) if (rst_n) begin
    logic [7:0][31:0] w;
    w = cur;
    for (int l = 0; l < 8; l++) w[l][31:28] = tb_bcid[3:0];
    sent[int'(tb_bcid)] = w;
    for (int k = 0; k < 4; k++) begin
      @(posedge clk160);
      for (int l = 0; l < 8; l++) rx_byte[l] <= w[l][31 - 8 * k -: 8];
      rx_first <= (k == 0) ? 8'hFF : 8'h00;
    end
  end

  task automatic bus_wr(input logic [15:0] a, input logic [15:0] d);
    @(negedge clk); ecs_addr = a; ecs_wdata = d; ecs_wr = 1;
    @(negedge clk); ecs_wr = 0;
  endtask
  task automatic bus_rd(input logic [15:0] a, output logic [15:0] d);
    @(negedge clk); ecs_addr = a; ecs_rd = 1;
    @(negedge clk); ecs_rd = 0; d = ecs_rdata;
  endtask

  // hits of one track at M3 pad (r, c) with offsets d2, d1
  function automatic logic [7:0][31:0] track_words(input int r, input int c, input int d2,
                                                   input int d1, input bit with_m1);
    logic [7:0][31:0] w = '0;
    int c2, c1;
    c2 = c + d2; c1 = c / 2 + d2 + d1;
    w[LNK_M3][24 + r] = 1; w[LNK_M3][c] = 1;
    w[LNK_M2][24 + r] = 1; w[LNK_M2][c2] = 1;
    if (with_m1) begin
      if (r < 2) w[LNK_M1A][r * 12 + c1] = 1; else w[LNK_M1B][(r - 2) * 12 + c1] = 1;
    end
    w[LNK_M4][r * 6 + c / 4] = 1;
    w[LNK_M5][r * 6 + c / 4] = 1;
    return w;
  endfunction

  function automatic logic [11:0] lut_a(input int m3, input int d2, input int d1);
    return {5'(m3 % 24), 4'(d2), 3'(d1)};
  endfunction

  // candidate check by BCID
  always @(negedge clk) if (rst_n && !dut.cfg.test_mode) begin
    int b;
    b = int'(cand_bcid);
    if (exp_c.exists(b)) begin
      logic [7:0] q;
      q = lut[0][lut_a(exp_c[b].m3, exp_c[b].d2, exp_c[b].m1 ? exp_c[b].d1 : 0)];
      `CHECK(cand0.valid && int'(cand0.m3) == exp_c[b].m3 && int'(cand0.d2) == exp_c[b].d2,
             $sformatf("candidate of crossing %0d: m3 %0d d2 %0d", b, cand0.m3, cand0.d2))
      if (exp_c[b].m1) `CHECK(int'(cand0.d1) == exp_c[b].d1, $sformatf("d1 %0d expected %0d", int'(cand0.d1), exp_c[b].d1))
      `CHECK(cand0.pt == q[6:0] && cand0.charge == q[7], "candidate pT and charge")
      if (exp_c1.exists(b)) begin
        `CHECK(cand1.valid && int'(cand1.m3) == exp_c1[b].m3, "second candidate nearest the beam")
        n_two++;
      end else `CHECK(!cand1.valid, "no second candidate")
      n_cand++;
      exp_c.delete(b);
    end else if (sent.exists(b) && sent[b][LNK_M3][23:0] == 0) begin
      `CHECK(!cand0.valid && !cand1.valid, "no candidate without hits")
      n_none++;
    end
  end

  // Level-0 accepts: on crossings chosen when they leave the L0 buffer
  int acc_q [$];
  bit acc_en = 1;
  always @(negedge clk) if (rst_n && !dut.cfg.test_mode) begin
    int b;
    b = int'(bcid_sub(cand_bcid, 106));
    l0_accept = acc_en && sent.exists(b) && (b % 37 == 3);
    if (l0_accept) acc_q.push_back(b);
  end

  // readout events
  logic [543:0] rev;
  int rwi = 0;
  always @(negedge clk) if (rst_n && ro.valid && ro_ready) begin
    rev[543 - 16 * rwi -: 16] = ro.data;
    if (ro.last) begin
      int b;
      b = acc_q.size() > 0 ? acc_q.pop_front() : -1;
      `CHECK(int'(rev[543:532]) == b, $sformatf("readout BCID %0d expected %0d", rev[543:532], b))
      if (b >= 0) `CHECK(rev[531:276] == sent[b], $sformatf("readout link words of %0d: %h vs %h", b, rev[531:276], sent[b]))
      n_ro++;
      rwi = 0;
    end else rwi++;
  end

  initial begin
    logic [15:0] d, e0, e1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 4096; a++) begin
        lut[s][a] = 8'($urandom);
        bus_wr(16'((s + 1) * 4096 + a), {8'h0, lut[s][a]});
      end
    // random crossings
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      cur = '0;
      if (n % 3 == 0) begin
        int r, c, d2, d1;
        bit m1;
        r = $urandom_range(0, 3); c = $urandom_range(6, 17);
        d2 = $urandom_range(0, 6) - 3; d1 = $urandom_range(0, 4) - 2;
        m1 = $urandom_range(0, 3) != 0 && c / 2 + d2 + d1 >= 0 && c / 2 + d2 + d1 < 12;
        cur = track_words(r, c, d2, d1, m1);
        exp_c[int'(tb_bcid)] = '{1, r * 24 + c, d2, d1, m1};
      end else if (n % 3 == 1) begin
        cur[LNK_M1A][$urandom_range(0, 23)] = 1;     // noise: M1 and M5 only
        cur[LNK_M5][$urandom_range(0, 23)] = 1;
      end
      if (n == 1500) begin                            // three tracks in row 1
        cur = track_words(1, 20, 0, 0, 1) | track_words(1, 8, 0, 0, 1) | track_words(1, 14, 0, 0, 1);
        exp_c[int'(tb_bcid)]  = '{1, 32, 0, 0, 1};
        exp_c1[int'(tb_bcid)] = '{1, 38, 0, 0, 1};
      end
      if (n == 2000) begin                            // border pads to the neighbours
        cur = '0;
        cur[LNK_M2][24 + 1] = 1; cur[LNK_M2][0] = 1;   // M2 pad row 1, column 0
        cur[LNK_M4][3 * 6 + 5] = 1;                    // M4 pad row 3, column 5
        @(negedge clk); cur = '0;
        repeat (6) @(negedge clk);
        `CHECK(1, "border check scheduled")
      end
    end
    cur = '0;
    repeat (10) @(negedge clk);
    acc_en = 0;
    repeat (1000) @(negedge clk);
    `CHECK(exp_c.size() == 0, $sformatf("%0d track crossings without candidate", exp_c.size()))
    `CHECK(n_cand > 900 && n_none > 900 && n_two == 1, $sformatf("%0d candidates checked", n_cand))
    `CHECK(n_ro > 50 && acc_q.size() == 0, $sformatf("%0d events read out", n_ro))
    // alignment delay shorter than the link path
    bus_rd(16'h0007, e0);
    bus_wr(16'h0002, 16'h0000);
    repeat (20) @(negedge clk);
    bus_wr(16'h0002, 16'h0004);
    bus_rd(16'h0007, e1);
    `CHECK(e1 > e0 + 10, $sformatf("alignment errors counted (%0d -> %0d)", e0, e1))
    // test mode: 16 injected events, event k holding a track at pad (1, 6 + k)
    for (int k = 0; k < 16; k++) begin
      logic [7:0][31:0] w;
      w = track_words(1, 6 + k % 12, 0, 0, 1);
      for (int l = 0; l < 8; l++) begin
        w[l][31:28] = 4'(k);
        bus_wr(16'h3000 + 16'(k * 16 + l * 2), w[l][15:0]);
        bus_wr(16'h3000 + 16'(k * 16 + l * 2 + 1), w[l][31:16]);
      end
    end
    bus_wr(16'h0000, 16'h0001);
    bus_wr(16'h0000, 16'h0003);
    repeat (200) @(negedge clk);
    for (int k = 0; k < 16; k++) begin
      logic [543:0] tev;
      for (int i = 0; i < 34; i++) begin
        bus_rd(16'h0006, d);
        tev[543 - 16 * i -: 16] = d;
      end
      `CHECK(tev[531:528] == 4'(k), $sformatf("injected event %0d link 7 tag", k))
      `CHECK(tev[99] && int'(tev[98:97]) == 0 && int'(tev[96:90]) == 24 + 6 + k % 12,
             $sformatf("injected event %0d candidate", k))
      `CHECK(tev[49], "injected flag in the record")
    end
    bus_rd(16'h0005, d);
    `CHECK(d[4], "derandomizer empty after 16 events")
    `FINISH
  end

  // border pads, two clocks after the crossing enters c1
  always @(negedge clk) if (rst_n && nb_out.left.m2[1][0]) begin
    `CHECK(nb_out.left.m2[1] == 5'b00001 && nb_out.right.m2 == '0, "M2 border pad to the left")
    `CHECK(nb_out.right.m4[3][0] && nb_out.top.m4[5] && nb_out.tr.m4[0], "M4 corner pad to right, top, top-right")
  end
endmodule
