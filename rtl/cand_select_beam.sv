// cand_select_beam -- keeps the two track candidates of a tower nearest the beam.
//
// Up to 96 candidates (one per M3 pad) can be flagged in a crossing.  Only
// the two closest to the beam are kept.  Pads are numbered row * NX3 + column
// with pad 0 in the tower corner nearest the beam axis, so the two valid
// candidates with the lowest pad numbers are chosen (two chained priority
// encoders).  c0 is the nearer one; an output with no candidate has valid = 0.
// The overflow output counts crossings in which candidates were dropped.
//
// Interface: clk, rst_n, tracks[N]; c0, c1, dropped.  Latency: one clock.
// Keeping the two nearest the beam is the paper's rule; measuring nearness by
// the pad number is this design's choice.
module cand_select_beam
  import l0mu_pkg::*;
#(
  parameter int unsigned N = N_M3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  track_t [N-1:0]      tracks,
  output track_t              c0,
  output track_t              c1,
  output logic                dropped
);

  track_t f0, f1;
  int     n;

  always_comb begin
    f0 = '0;
    f1 = '0;
    n  = 0;
    for (int i = int'(N) - 1; i >= 0; i--) begin
      if (tracks[i].valid) begin
        f1 = f0;
        f0 = tracks[i];
        n  = n + 1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c0      <= '0;
      c1      <= '0;
      dropped <= 1'b0;
    end else begin
      c0      <= f0;
      c1      <= f1;
      dropped <= n > 2;
    end
  end

endmodule
