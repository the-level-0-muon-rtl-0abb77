// strip_to_pad -- logical pads from crossed horizontal and vertical strips.
//
// In stations read out with strips a logical pad is hit when both the
// horizontal strip (its row) and the vertical strip (its column) crossing on
// it are hit.  In pad mode the hit map is already made of pads and is passed
// through.  Purely combinational.
//
// Interface: strip_mode, hstrip (one bit per row), vstrip (one per column),
// pads_in (pad mode); pads[row][column].
// The AND of crossing strips is the paper's rule; selecting between strip and
// pad readout by a mode input is this design's choice.
module strip_to_pad #(
  parameter int unsigned NR = 4,
  parameter int unsigned NC = 24
) (
  input  logic                   strip_mode,
  input  logic [NR-1:0]          hstrip,
  input  logic [NC-1:0]          vstrip,
  input  logic [NR-1:0][NC-1:0]  pads_in,
  output logic [NR-1:0][NC-1:0]  pads
);

  always_comb
    for (int unsigned r = 0; r < NR; r++)
      for (int unsigned c = 0; c < NC; c++)
        pads[r][c] = strip_mode ? (hstrip[r] & vstrip[c]) : pads_in[r][c];

endmodule
