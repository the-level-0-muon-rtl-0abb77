// time_align -- phases one link's words with the 40 MHz system clock.
//
// Words recovered from a link arrive in the link's own clock domain, with an
// unknown phase and a delay that differs from link to link.  Each word carries
// the low bits of its bunch crossing identifier (BCID) in its top LINK_BC_W
// bits.  The block writes every word into a circular dual-port memory at the
// address given by those bits, and reads it back on the system clock at the
// address of the crossing sys_bcid - delay.  Any link whose path is shorter
// than `delay` crossings is therefore delivered with all others on the same
// crossing.  The memory is addressed by the 3 low BCID bits and the 4 bits the
// word carries are compared with the expected crossing: when they differ, err
// pulses and the link is late or early by 1..15 crossings (except 8), or its
// source has lost its BCID synchronisation.
// Limitation of this choice: an orbit (3564 crossings) is not a multiple of
// the 8-word depth, so the first words of an orbit reuse the addresses of the
// last words of the previous one 4 crossings later.  The delay must thus lie
// between the longest link path + 1 and the shortest path + 4 crossings:
// links are aligned if their paths differ by at most 3 crossings.
//
// Interface: write side wclk/we/wdata (one word per crossing); read side clk,
// rst_n, sys_bcid, delay; rdata and rbcid (the crossing rdata belongs to),
// err.  Latency: rdata is registered, one system clock after sys_bcid.
// The circular memory is the paper's mechanism; addressing it by the BCID the
// word carries and the 8-word depth are this design's choice.
module time_align
  import l0mu_pkg::*;
#(
  parameter int unsigned W  = LINK_W,
  parameter int unsigned AW = LINK_BC_W - 1               // depth 2**AW
) (
  input  logic              wclk,
  input  logic              we,
  input  logic [W-1:0]      wdata,
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BCID_W-1:0] sys_bcid,
  input  logic [3:0]        delay,
  output logic [W-1:0]      rdata,
  output logic [BCID_W-1:0] rbcid,
  output logic              err
);

  logic [W-1:0] mem [2**AW];
  logic [BCID_W-1:0] want;

  always_ff @(posedge wclk)
    if (we) mem[wdata[W-LINK_BC_W +: AW]] <= wdata;

  assign want = bcid_sub(sys_bcid, int'(delay));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata <= '0;
      rbcid <= '0;
      err   <= 1'b0;
    end else begin
      rdata <= mem[want[AW-1:0]];
      rbcid <= want;
      err   <= mem[want[AW-1:0]][W-1 -: LINK_BC_W] != want[LINK_BC_W-1:0];
    end
  end

endmodule
