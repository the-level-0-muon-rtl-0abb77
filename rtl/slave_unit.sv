// slave_unit -- second FPGA of the controller board (SU).
//
// Receives from each processing board the second candidate link (M1/M2
// information, status and BCID of the board's two candidates), rebuilds and
// time-aligns it like the control unit does.  The control unit tells, one
// clock later, which two of the 2*NB candidates it kept (sel0, sel1); the SU
// switches their information to its own link to the Level-0 decision unit:
//   {BCID[1:0], cand1, cand0},  cand = {valid, board[3:0], PU[1:0], d2[3:0],
//                                       d1[2:0], charge}.
// Its L0 event is 720 bits (708 + BCID), read out as 45 words of 16 bits.
// In link-test mode a Spyd checker watches each incoming link.
//
// Interface: clk, clk160, rst_n, bc0, l0_accept, l0_latency, align_delay,
// spyd_mode, rx_byte/rx_first per board, sel0/sel1 from the CU; l0du_word,
// sync_err, Spyd status, DAQ stream.  Timing: l0du_word is registered one
// clock after the control unit's word for the same crossing.
// The SU's role ("candidates switching"), inputs and 720-bit event are the
// paper's; word layouts are this design's choice.
module slave_unit
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
  input  logic [$clog2(2*NB)-1:0]     sel0,
  input  logic [$clog2(2*NB)-1:0]     sel1,
  output logic [LINK_W-1:0]           l0du_word,
  output logic [15:0]                 sync_err,
  output logic [NB-1:0]               spyd_no_sync,
  output logic [NB-1:0][15:0]         spyd_errors,
  output logic [NB-1:0][23:0]         spyd_addr,
  output ro_word_t                    daq,
  input  logic                        daq_ready
);

  localparam int unsigned SW    = $clog2(2 * NB);
  localparam int unsigned L0_W  = SU_EV_W - BCID_W;           // 708
  localparam int unsigned REC_W = NB * LINK_W + LINK_W;

  logic [BCID_W-1:0] sys_bcid;
  logic              sys_dv;
  bcid_counter u_bcid (.clk, .rst_n, .bc0, .bcid(sys_bcid), .data_valid(sys_dv));

  logic [NB-1:0][LINK_W-1:0] lword, aword, aword_q;
  logic [NB-1:0]             lstb, lerr, spyd_synced;
  logic [NB-1:0][BCID_W-1:0] abcid;
  logic [BCID_W-1:0]         bcid_q;

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

  // information of candidate s (board s/2, candidate s%2) from link B
  function automatic logic [14:0] pick(input logic [NB-1:0][LINK_W-1:0] w,
                                       input logic [SW-1:0] s);
    logic [LINK_W-1:0] x;
    logic [3:0]        board;
    board = 4'(s >> 1);
    x     = w[s >> 1];
    return s[0] ? {x[25], board, x[23:14]} : {x[24], board, x[13:4]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aword_q   <= '0;
      bcid_q    <= '0;
      l0du_word <= '0;
      sync_err  <= '0;
    end else begin
      aword_q   <= aword;
      bcid_q    <= abcid[0];
      l0du_word <= {bcid_q[1:0], pick(aword_q, sel1), pick(aword_q, sel0)};
      if (!spyd_mode && |lerr && sync_err != 16'hFFFF) sync_err <= sync_err + 1'b1;
    end
  end

  // ------------------------------------------------------------ L0 buffer
  logic [L0_W-1:0]    rec, rec_out;
  logic [SU_EV_W-1:0] ev;
  logic [BCID_W-1:0]  bcid_qq;
  logic [NB-1:0][LINK_W-1:0] aword_qq;
  logic [4:0]         dr_count;
  logic               dr_full;
  logic [15:0]        dr_lost;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bcid_qq  <= '0;
      aword_qq <= '0;
    end else begin
      bcid_qq  <= bcid_q;
      aword_qq <= aword_q;
    end

  assign rec = {aword_qq, l0du_word, (L0_W - REC_W)'(0)};

  l0_buffer #(.DW(L0_W), .DEPTH(128)) u_l0 (.clk, .rst_n, .din(rec),
                                             .latency(l0_latency), .dout(rec_out));
  assign ev = {bcid_sub(bcid_qq, int'(l0_latency) + 1), rec_out};

  l0_derandomizer #(.EV_W(SU_EV_W), .DEPTH(16)) u_dr (
    .clk, .rst_n, .push(l0_accept), .ev, .out(daq), .out_ready(daq_ready),
    .count(dr_count), .full(dr_full), .lost(dr_lost));

endmodule
