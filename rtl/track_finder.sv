// track_finder -- the road algorithm of one tower, run for all M3 pads at once.
//
// For every M3 pad that is hit, the straight line from the interaction point
// through the pad is extrapolated to the other stations.  Because the pad
// layout is projective this extrapolation is a fixed index mapping:
//   M2 (same x-granularity as M3):  column c,
//   M4, M5 (pads four M3 pads wide): column c/4, same row,
// A track is flagged when at least one hit lies inside the field of interest
// (FOI) of each of M2, M4 and M5.  The M2 FOI is open along x (+-foi_m2 pads);
// the M4/M5 FOIs along x (+-foi_m4/5 pads) and along y (+-1 row).  The M2 hit
// closest to the extrapolation is kept; its offset d2 (in M2 pads) with the M3
// pad defines the M3-M2 straight line, which points in M1 to column
//   c/2 + M1_GAIN * d2
// (M1 pads are two M3 pads wide).  The M1 hit closest to that point inside
// +-foi_m1 gives d1; m1_found tells whether there was one.  At equal distance
// the hit on the lower-column side is preferred.
//
// Inputs are the hit maps of the tower extended by the pads received from the
// neighbouring towers: M1 and M2 by EXT_M1 and EXT_M2 columns on each side,
// M4 and M5 by EXT_45 columns and one row on each side.  Purely
// combinational; 96 identical comparisons built with generate-like loops.
//
// Follows the paper: the station roles, the FOI rule, the closest-hit choice,
// the M3-M2 line pointing into M1 and the +-1 pad y-FOI in M4/M5.  This
// design's choices: the tie rule, the FOI maxima and the M1 gain of 1 pad per
// M2 pad (read from the numbered pads 0-5 of the paper's extrapolation figure).
module track_finder
  import l0mu_pkg::*;
(
  input  logic [NY-1:0][W1E-1:0]    m1e,
  input  logic [NY-1:0][W2E-1:0]    m2e,
  input  logic [NY-1:0][NX3-1:0]    m3,
  input  logic [NY+1:0][W45E-1:0]   m4e,      // row 0 is the row below the tower
  input  logic [NY+1:0][W45E-1:0]   m5e,
  input  logic [1:0]                foi_m1,
  input  logic [3:0]                foi_m2,
  input  logic [1:0]                foi_m4,
  input  logic [1:0]                foi_m5,
  output track_t [N_M3-1:0]         tracks
);

  always_comb begin
    for (int r = 0; r < int'(NY); r++) begin
      for (int c = 0; c < int'(NX3); c++) begin
        automatic logic hit2 = 1'b0, hit4 = 1'b0, hit5 = 1'b0, hit1 = 1'b0;
        automatic int   d2 = 0, d1 = 0, x1 = 0;
        automatic int   x4 = c / int'(NX3 / NX45);

        // M2: nearest hit inside +-foi_m2, lower side wins a tie
        for (int a = int'(FOI2_MAX); a >= 0; a--) begin
          if (a <= int'(foi_m2)) begin
            if (m2e[r][c + a + int'(EXT_M2)]) begin hit2 = 1'b1; d2 = a;  end
            if (m2e[r][c - a + int'(EXT_M2)]) begin hit2 = 1'b1; d2 = -a; end
          end
        end

        // M4, M5: any hit in the x/y window
        for (int dy = -1; dy <= 1; dy++) begin
          for (int dx = -int'(FOI45_MAX); dx <= int'(FOI45_MAX); dx++) begin
            if (dx <= int'(foi_m4) && -dx <= int'(foi_m4) &&
                m4e[r + 1 + dy][x4 + dx + int'(EXT_45)]) hit4 = 1'b1;
            if (dx <= int'(foi_m5) && -dx <= int'(foi_m5) &&
                m5e[r + 1 + dy][x4 + dx + int'(EXT_45)]) hit5 = 1'b1;
          end
        end

        // M1: nearest hit to the M3-M2 extrapolation
        x1 = c / int'(NX3 / NX1) + int'(M1_GAIN) * d2 + int'(EXT_M1);
        for (int a = int'(FOI1_MAX); a >= 0; a--) begin
          if (a <= int'(foi_m1)) begin
            if (m1e[r][x1 + a]) begin hit1 = 1'b1; d1 = a;  end
            if (m1e[r][x1 - a]) begin hit1 = 1'b1; d1 = -a; end
          end
        end

        tracks[r * int'(NX3) + c].valid    = m3[r][c] & hit2 & hit4 & hit5;
        tracks[r * int'(NX3) + c].m1_found = hit1;
        tracks[r * int'(NX3) + c].m3       = M3A_W'(r * int'(NX3) + c);
        tracks[r * int'(NX3) + c].d2       = D2_W'(d2);
        tracks[r * int'(NX3) + c].d1       = D1_W'(d1);
      end
    end
  end

endmodule
