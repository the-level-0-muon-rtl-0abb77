// tb_track_finder -- random sparse hit maps in the five stations (including
// the neighbour extensions) and random fields of interest; every one of the
// 96 road algorithms is compared with a reference written here from the
// geometry: an M3 pad makes a track when M2, M4 and M5 each have a hit in
// their window; the kept M2 hit is the one of smallest |offset| (the lower x
// side on a tie), and the M1 hit nearest the straight line through M3 and M2.
`include "tb_check.svh"
module tb_track_finder;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [NY-1:0][W1E-1:0]  m1e;
  logic [NY-1:0][W2E-1:0]  m2e;
  logic [NY-1:0][NX3-1:0]  m3;
  logic [NY+1:0][W45E-1:0] m4e, m5e;
  logic [1:0] f1, f4, f5;
  logic [3:0] f2;
  track_t [N_M3-1:0] tracks;
  int n_valid = 0, n_m1 = 0;
  track_finder dut (.m1e, .m2e, .m3, .m4e, .m5e, .foi_m1(f1), .foi_m2(f2),
                    .foi_m4(f4), .foi_m5(f5), .tracks);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 100000)

  // nearest set bit of v around centre within +-w; lower side first on ties
  function automatic int nearest(input logic [63:0] v, input int centre, input int w,
                                 output bit found);
    found = 0;
    for (int a = 0; a <= w; a++) begin
      if (v[centre - a]) begin found = 1; return -a; end
      if (v[centre + a]) begin found = 1; return a; end
    end
    return 0;
  endfunction

  function automatic logic [63:0] rnd(input int w, input int pct);
    logic [63:0] v = '0;
    for (int i = 0; i < w; i++) v[i] = ($urandom_range(0, 99) < pct);
    return v;
  endfunction

  initial begin
    for (int n = 0; n < 600; n++) begin
      f1 = 2'($urandom_range(0, 3)); f2 = 4'($urandom_range(0, 5));
      f4 = 2'($urandom_range(0, 2)); f5 = 2'($urandom_range(0, 2));
      for (int r = 0; r < NY; r++) begin
        m1e[r] = W1E'(rnd(W1E, 6));
        m2e[r] = W2E'(rnd(W2E, 5));
        m3[r]  = NX3'(rnd(NX3, 15));
      end
      for (int r = 0; r < NY + 2; r++) begin
        m4e[r] = W45E'(rnd(W45E, 12));
        m5e[r] = W45E'(rnd(W45E, 12));
      end
      #1;
      for (int r = 0; r < NY; r++)
        for (int c = 0; c < NX3; c++) begin
          bit h2, h1, h4, h5;
          int d2, d1, x4;
          track_t t;
          t = tracks[r * NX3 + c];
          d2 = nearest(64'(m2e[r]), c + EXT_M2, f2, h2);
          x4 = c / 4 + EXT_45;
          h4 = 0; h5 = 0;
          for (int y = r; y <= r + 2; y++)
            for (int x = x4 - f4; x <= x4 + f4; x++) if (m4e[y][x]) h4 = 1;
          for (int y = r; y <= r + 2; y++)
            for (int x = x4 - f5; x <= x4 + f5; x++) if (m5e[y][x]) h5 = 1;
          `CHECK(t.valid == (m3[r][c] && h2 && h4 && h5),
                 $sformatf("valid of pad %0d,%0d (test %0d)", r, c, n))
          `CHECK(t.m3 == 7'(r * NX3 + c), "pad number")
          if (t.valid) begin
            n_valid++;
            d1 = nearest(64'(m1e[r]), c / 2 + d2 + EXT_M1, f1, h1);
            `CHECK(int'(t.d2) == d2, $sformatf("d2 %0d expected %0d", t.d2, d2))
            `CHECK(t.m1_found == h1, "M1 hit found")
            if (h1) begin
              n_m1++;
              `CHECK(int'(t.d1) == d1, $sformatf("d1 %0d expected %0d", t.d1, d1))
            end
          end
        end
    end
    `CHECK(n_valid > 500 && n_m1 > 200, $sformatf("%0d tracks, %0d with M1", n_valid, n_m1))
    `FINISH
  end
endmodule
