// pt_lut -- transverse momentum of the two selected candidates.
//
// pT is measured from the track hits in M1 and M2.  For a candidate the pair
// (M2 offset d2, M1 offset d1) together with the M3 column fixes both hits,
// so {column, d2, d1} (12 bits) addresses a table whose 8-bit word is
// {charge, pT[6:0]}.  Two tables exist, one per selected candidate, so both
// are converted in the same clock.  The control system loads them; their
// contents (the momentum calibration) are not part of this design.
// A candidate without valid keeps pT = 0.
//
// Interface: clk, rst_n, c0/c1 in (track_t), wr_en, wr_sel (which table),
// wr_addr, wr_data; o0/o1 (cand_t, pu field 0).  Latency: one clock (the
// tables are read synchronously, as block RAM).
// Two look-up tables addressed by the M1 and M2 hits are the paper's; the
// address layout and the 8-bit word are this design's choice.
module pt_lut
  import l0mu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  track_t            c0,
  input  track_t            c1,
  input  logic              wr_en,
  input  logic              wr_sel,
  input  logic [LUT_AW-1:0] wr_addr,
  input  logic [7:0]        wr_data,
  output cand_t             o0,
  output cand_t             o1
);

  logic [7:0] lut0 [2**LUT_AW];
  logic [7:0] lut1 [2**LUT_AW];
  logic [7:0] q0, q1;
  track_t     t0, t1;

  function automatic logic [LUT_AW-1:0] addr_of(input track_t t);
    logic [4:0] col;
    col = 5'(t.m3 % M3A_W'(NX3));
    return {col, t.d2, t.d1};
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel) lut0[wr_addr] <= wr_data;
    if (wr_en &&  wr_sel) lut1[wr_addr] <= wr_data;
    q0 <= lut0[addr_of(c0)];
    q1 <= lut1[addr_of(c1)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t0 <= '0;
      t1 <= '0;
    end else begin
      t0 <= c0;
      t1 <= c1;
    end
  end

  always_comb begin
    o0 = '{valid: t0.valid, pu: 2'b00, m3: t0.m3, d2: t0.d2, d1: t0.d1,
           charge: t0.valid & q0[7], pt: t0.valid ? q0[6:0] : '0};
    o1 = '{valid: t1.valid, pu: 2'b00, m3: t1.m3, d2: t1.d2, d1: t1.d1,
           charge: t1.valid & q1[7], pt: t1.valid ? q1[6:0] : '0};
  end

endmodule
