// bcsu -- Best Candidate Selection Unit of a processing board.
//
// Receives the two candidates of each of the board's four processing units,
// keeps the two of highest pT (pt_sorter) and sends them to the controller
// board on two 1.6 Gbps links, 32 bits per crossing each:
//   link A (to the control unit): {BCID[3:0], pT1, M3 pad1, pT0, M3 pad0}
//   link B (to the slave unit):   {BCID[3:0], 2'b0, valid1, valid0,
//                                  {PU, d2, d1, charge} of 1 and of 0, 4'b0}
// An empty candidate is sent with pT 0 and valid 0.  Each word goes through
// link_mux to the transceiver as four bytes at 160 MHz.
//
// It also logs its inputs and outputs in its own L0 buffer (340 bits plus the
// 12-bit BCID: 352-bit events), and drains the derandomizers of the four PUs
// and its own towards the DAQ on two streams (PU0, PU1 on DAQ link 0; PU2,
// PU3 and itself on DAQ link 1).  In link-test mode (spyd_mode) both outgoing
// links carry Spyd test frames with address {slot, fpga 4, port 0/1}.
//
// Interface: clk (40 MHz), clk160, rst_n, l0_accept, l0_latency, slot,
// spyd_mode, the PUs' candidates and readout streams; link bytes to the
// controller; two DAQ streams.  Timing: the link words leave one clock after
// the candidates arrive (sorted and packed in one stage), then link_mux adds
// its byte serialisation.
// Selection of the two highest pT, the split of the candidate information
// over two links and the 352-bit L0 event are the paper's; the word layouts,
// DAQ link assignment and test-mode switch are this design's choice.
module bcsu
  import l0mu_pkg::*;
(
  input  logic                    clk,
  input  logic                    clk160,
  input  logic                    rst_n,
  input  logic                    l0_accept,
  input  logic [6:0]              l0_latency,
  input  logic [7:0]              slot,
  input  logic                    spyd_mode,
  input  cand_t [3:0][1:0]        cand,
  input  logic [BCID_W-1:0]       cand_bcid,
  input  ro_word_t [3:0]          pu_ro,
  output logic [3:0]              pu_ro_ready,
  output logic [1:0][7:0]         tx_byte,
  output logic [1:0]              tx_first,
  output ro_word_t [1:0]          daq,
  input  logic [1:0]              daq_ready
);

  localparam int unsigned L0_W  = BCSU_EV_W - BCID_W;        // 340
  localparam int unsigned REC_W = 10 * $bits(cand_t);        // 250

  // ------------------------------------------------------------ selection
  cand_t [7:0]      c;
  logic [7:0][7:0]  key;
  logic [2:0]       i0, i1;
  logic [7:0]       k0, k1;

  always_comb
    for (int p = 0; p < 4; p++)
      for (int j = 0; j < 2; j++) begin
        c[2 * p + j]    = cand[p][j];
        c[2 * p + j].pu = 2'(p);
        key[2 * p + j]  = {cand[p][j].valid, cand[p][j].pt};
      end

  pt_sorter #(.N(8), .KW(8)) u_sort (.key, .i0, .i1, .k0, .k1);

  cand_t             s0, s1;
  cand_t [7:0]       c_q;
  logic [BCID_W-1:0] bcid_q;
  logic [1:0][LINK_W-1:0] word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0 <= '0; s1 <= '0; c_q <= '0; bcid_q <= '0;
    end else begin
      s0     <= k0[7] ? c[i0] : '0;
      s1     <= k1[7] ? c[i1] : '0;
      c_q    <= c;
      bcid_q <= cand_bcid;
    end
  end

  // ------------------------------------------------------------ links
  logic [1:0][LINK_W-1:0] spyd_w;
  logic [1:0]             spyd_fs;                // frame markers, not used here
  logic                   tog, tog_q, tog_qq;    // crossing marker, 40 -> 160 MHz
  logic                   stb;

  for (genvar k = 0; k < 2; k++) begin : g_spyd
    spyd_tx #(.W(LINK_W)) u_tx (.clk, .rst_n, .en(spyd_mode), .slot, .fpga(8'd4),
                                .port(8'(k)), .word(spyd_w[k]), .frame_start(spyd_fs[k]));
  end

  assign word[0] = spyd_mode ? spyd_w[0] : pack_word_a(bcid_q, s0, s1);
  assign word[1] = spyd_mode ? spyd_w[1] : pack_word_b(bcid_q, s0, s1);

  // one strobe per crossing in the 160 MHz domain: a bit toggled every
  // 40 MHz clock is synchronised and its changes detected
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tog <= 1'b0;
    else        tog <= ~tog;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      tog_q  <= 1'b0;
      tog_qq <= 1'b0;
    end else begin
      tog_q  <= tog;
      tog_qq <= tog_q;
    end
  end
  assign stb = tog_q ^ tog_qq;

  for (genvar k = 0; k < 2; k++) begin : g_mux
    link_mux u_mux (.clk160, .rst_n, .word(word[k]), .word_stb(stb),
                    .tx_byte(tx_byte[k]), .tx_first(tx_first[k]));
  end

  // ------------------------------------------------------------ L0 buffer
  logic [L0_W-1:0]       rec, rec_out;
  logic [BCSU_EV_W-1:0]  ev;
  ro_word_t              own_ro;
  logic                  own_ready;
  logic [4:0]            dr_count;
  logic                  dr_full;
  logic [15:0]           dr_lost;

  assign rec = {c_q, s0, s1, (L0_W - REC_W)'(0)};

  l0_buffer #(.DW(L0_W), .DEPTH(128)) u_l0 (.clk, .rst_n, .din(rec),
                                             .latency(l0_latency), .dout(rec_out));

  assign ev = {bcid_sub(bcid_q, int'(l0_latency) + 1), rec_out};

  l0_derandomizer #(.EV_W(BCSU_EV_W), .DEPTH(16)) u_dr (
    .clk, .rst_n, .push(l0_accept), .ev, .out(own_ro), .out_ready(own_ready),
    .count(dr_count), .full(dr_full), .lost(dr_lost));

  // ------------------------------------------------------------ DAQ
  logic [1:0] rdy0;
  logic [2:0] rdy1;

  daq_readout #(.N(2)) u_daq0 (.clk, .rst_n, .src({pu_ro[1], pu_ro[0]}),
                               .src_ready(rdy0), .out(daq[0]), .out_ready(daq_ready[0]));
  daq_readout #(.N(3)) u_daq1 (.clk, .rst_n, .src({own_ro, pu_ro[3], pu_ro[2]}),
                               .src_ready(rdy1), .out(daq[1]), .out_ready(daq_ready[1]));

  assign pu_ro_ready = {rdy1[1:0], rdy0};
  assign own_ready   = rdy1[2];

endmodule
