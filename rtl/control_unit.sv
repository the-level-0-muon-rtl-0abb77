// control_unit -- first FPGA of the controller board (CU).
//
// Receives from each of the NB processing boards the first candidate link
// (BCID, pT and M3 pad of the board's two candidates).  Each link is rebuilt
// from its 160 MHz bytes (link_demux) and time-aligned on the system clock
// (time_align), so that the 2*NB candidates of one crossing are seen
// together; a link whose BCID bits do not match counts a synchronisation
// error.  The two candidates of highest pT are chosen (pt_sorter, pT 0
// meaning no candidate) and sent to the Level-0 decision unit as
//   {BCID[3:0], pT1, M3 pad1, pT0, M3 pad0};
// their indices (board * 2 + candidate) go to the slave unit, which sends the
// rest of their information.  The CU logs its inputs and outputs in a 704-bit
// L0 event (692 bits + BCID) read out as 44 words of 16 bits.
// In link-test mode a Spyd checker watches each incoming link.
//
// Interface: clk, clk160, rst_n, bc0, l0_accept, l0_latency, align_delay,
// spyd_mode; rx_byte/rx_first per board; l0du_word, sel0/sel1, sync_err;
// Spyd status per link; DAQ stream.  Timing: l0du_word and sel0/sel1 are
// registered one clock after the aligned words.
// The CU's role, inputs and 704-bit L0 event are the paper's; the word
// layout and the index interface to the SU are this design's choice.
module control_unit
  import l0mu_pkg::*;
#(
  parameter int unsigned NB = 12
) (
  input  logic                        clk,
  input  logic                        clk160,
  input  logic                        rst_n,
  input  logic                        bc0,
  input  logic                        l0_accept,
  input  logic [6:0]                  l0_latency,
  input  logic [3:0]                  align_delay,
  input  logic                        spyd_mode,
  input  logic [NB-1:0][7:0]          rx_byte,
  input  logic [NB-1:0]               rx_first,
  output logic [LINK_W-1:0]           l0du_word,
  output logic [$clog2(2*NB)-1:0]     sel0,
  output logic [$clog2(2*NB)-1:0]     sel1,
  output logic [15:0]                 sync_err,
  output logic [NB-1:0]               spyd_no_sync,
  output logic [NB-1:0][15:0]         spyd_errors,
  output logic [NB-1:0][23:0]         spyd_addr,
  output ro_word_t                    daq,
  input  logic                        daq_ready
);

  localparam int unsigned SW    = $clog2(2 * NB);
  localparam int unsigned L0_W  = CU_EV_W - BCID_W;           // 692
  localparam int unsigned REC_W = NB * LINK_W + LINK_W + 2 * SW;

  logic [BCID_W-1:0] sys_bcid;
  logic              sys_dv;
  bcid_counter u_bcid (.clk, .rst_n, .bc0, .bcid(sys_bcid), .data_valid(sys_dv));

  logic [NB-1:0][LINK_W-1:0] lword, aword;
  logic [NB-1:0]             lstb, lerr, spyd_synced;
  logic [NB-1:0][BCID_W-1:0] abcid;

  for (genvar b = 0; b < NB; b++) begin : g_link
    link_demux u_dmx (.clk160, .rst_n, .rx_byte(rx_byte[b]), .rx_first(rx_first[b]),
                      .word(lword[b]), .word_stb(lstb[b]));
    time_align u_ta (.wclk(clk160), .we(lstb[b]), .wdata(lword[b]), .clk, .rst_n,
                     .sys_bcid, .delay(align_delay), .rdata(aword[b]),
                     .rbcid(abcid[b]), .err(lerr[b]));
    spyd_rx #(.W(LINK_W)) u_spyd (.clk(clk160), .rst_n, .en(lstb[b] && spyd_mode),
                                  .word(lword[b]), .clear(!spyd_mode),
                                  .synced(spyd_synced[b]), .no_sync(spyd_no_sync[b]),
                                  .errors(spyd_errors[b]), .addr(spyd_addr[b]));
  end

  // ------------------------------------------------------------ selection
  logic [2*NB-1:0][PT_W-1:0]  key;
  logic [2*NB-1:0][M3A_W-1:0] m3;
  logic [SW-1:0]              i0, i1;
  logic [PT_W-1:0]            k0, k1;

  always_comb
    for (int b = 0; b < int'(NB); b++) begin
      key[2 * b]     = aword[b][13:7];
      m3[2 * b]      = aword[b][6:0];
      key[2 * b + 1] = aword[b][27:21];
      m3[2 * b + 1]  = aword[b][20:14];
    end

  pt_sorter #(.N(2 * NB), .KW(PT_W)) u_sort (.key, .i0, .i1, .k0, .k1);

  logic [NB-1:0][LINK_W-1:0] aword_q;
  logic [BCID_W-1:0]         bcid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l0du_word <= '0;
      sel0      <= '0;
      sel1      <= '0;
      sync_err  <= '0;
      aword_q   <= '0;
      bcid_q    <= '0;
    end else begin
      l0du_word <= {abcid[0][3:0], k1, m3[i1], k0, m3[i0]};
      sel0      <= i0;
      sel1      <= i1;
      aword_q   <= aword;
      bcid_q    <= abcid[0];
      if (!spyd_mode && |lerr && sync_err != 16'hFFFF) sync_err <= sync_err + 1'b1;
    end
  end

  // ------------------------------------------------------------ L0 buffer
  logic [L0_W-1:0]    rec, rec_out;
  logic [CU_EV_W-1:0] ev;
  logic [5:0]         dr_count;
  logic               dr_full;
  logic [15:0]        dr_lost;

  assign rec = {aword_q, l0du_word, sel0, sel1, (L0_W - REC_W)'(0)};

  l0_buffer #(.DW(L0_W), .DEPTH(128)) u_l0 (.clk, .rst_n, .din(rec),
                                             .latency(l0_latency), .dout(rec_out));
  assign ev = {bcid_sub(bcid_q, int'(l0_latency) + 1), rec_out};

  l0_derandomizer #(.EV_W(CU_EV_W), .DEPTH(16)) u_dr (
    .clk, .rst_n, .push(l0_accept), .ev, .out(daq), .out_ready(daq_ready),
    .count(dr_count[4:0]), .full(dr_full), .lost(dr_lost));
  assign dr_count[5] = 1'b0;

endmodule
