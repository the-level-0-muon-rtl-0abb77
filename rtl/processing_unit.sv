// processing_unit -- the processing element that runs the track finding of
// one tower (one FPGA of a processing board).
//
// Data path, one 40 MHz crossing per clock:
//   links   Eight optical links (two for M1, M2 and M3, one for M4 and M5)
//           arrive as bytes at 160 MHz; link_demux rebuilds the 32-bit words
//           and time_align puts all links on the same crossing of the system
//           clock (stage c0).
//   c1      injection_mux: fibre words, or in test mode the words replayed
//           by the injection buffer.  The words are decoded into hit maps:
//           M1, M4, M5 are read out as pads, M2 and M3 as 4 horizontal and 24
//           vertical strips crossed into 96 pads (strip_to_pad).
//   c2      own hit maps registered; the border pads are sent to the eight
//           neighbouring units (nb_out), reformatted along x when a
//           neighbour has another pad size (neighbour_format).
//   c3      own maps plus the neighbours' border pads (nb_in, their c2
//           registers) form the extended maps seen by track_finder; the two
//           candidates nearest the beam are kept (cand_select_beam).
//   c4      the two pT tables give pT and charge (pt_lut): cand0/cand1.
//   L0      the record of the crossing (link words, neighbour pads, the two
//           candidates; 532 bits) enters the L0 buffer; when the Level-0
//           accept for it arrives, {BCID, record} (544 bits) goes into the
//           derandomizer, read out as 34 words of 16 bits.  The capture buffer
//           can copy one accepted event for the control system.
// In test mode the derandomizer is read by the control system and the
// injected crossings accept themselves, so the 16 injected events can be
// read back after the L0 latency.
//
// Link word layout (assumed): bits 31:28 BCID LSBs, bits 27:0 hits.  M1 link
// A carries rows 0-1 and link B rows 2-3 (12 pads each, bit row*12+col);
// M2/M3 carry vertical strips in bits 23:0 and horizontal strips in 27:24;
// M4/M5 carry 24 pads, bit row*6+col.  The second M2 and M3 links are kept in
// the record but carry no hits in this tower layout.
//
// Interface: clk (40 MHz), rst_n, bc0, l0_accept (the decision for the
// crossing leaving the L0 buffer), per-link rx_clk/rx_byte/rx_first,
// nb_in/nb_out, cand0/cand1 with cand_bcid, the 16-bit readout stream
// ro/ro_ready, the ECS local bus, align_err.
// Timing: cand0/cand1 are valid 4 clocks after the aligned words (c0); the
// record of a crossing meets its accept cfg.l0_latency+1 clocks after its
// candidates.
// The blocks and their order follow the paper's block diagram of a PU; the
// link layout, pipeline depth and test-mode accept are this design's choice.
module processing_unit
  import l0mu_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         bc0,
  input  logic                         l0_accept,
  input  logic [N_LINKS-1:0]           rx_clk,
  input  logic [N_LINKS-1:0][7:0]      rx_byte,
  input  logic [N_LINKS-1:0]           rx_first,
  input  nb_t                          nb_in,
  output nb_t                          nb_out,
  output cand_t                        cand0,
  output cand_t                        cand1,
  output logic [BCID_W-1:0]            cand_bcid,
  output ro_word_t                     ro,
  input  logic                         ro_ready,
  input  logic [15:0]                  ecs_addr,
  input  logic [15:0]                  ecs_wdata,
  input  logic                         ecs_wr,
  input  logic                         ecs_rd,
  output logic [15:0]                  ecs_rdata,
  output logic                         align_err
);

  localparam int unsigned REC_W = N_LINKS * LINK_W + $bits(nb_t) + 2 * $bits(cand_t) + 1;

  // ------------------------------------------------------------ control
  pu_cfg_t           cfg;
  logic              inj_start, cap_arm, lut_wr, lut_sel, inj_wr, dr_pop;
  logic [LUT_AW-1:0] lut_addr;
  logic [7:0]        lut_data, inj_addr;
  logic [15:0]       inj_data, cap_data, status, errors;
  logic [5:0]        cap_idx;
  logic              cap_done;
  ro_word_t          dr_out;
  logic [4:0]        dr_count;
  logic              dr_full;
  logic [15:0]       dr_lost;
  logic              sel_dropped, dropped_seen;

  ecs_interface u_ecs (
    .clk, .rst_n, .addr(ecs_addr), .wdata(ecs_wdata), .wr(ecs_wr), .rd(ecs_rd),
    .rdata(ecs_rdata), .cfg, .inj_start, .cap_arm,
    .lut_wr, .lut_sel, .lut_addr, .lut_data, .inj_wr, .inj_addr, .inj_data,
    .cap_idx, .cap_data, .status, .errors, .dr_data(dr_out.data), .dr_pop);

  logic [BCID_W-1:0] sys_bcid;
  logic              sys_dv;
  bcid_counter u_bcid (.clk, .rst_n, .bc0, .bcid(sys_bcid), .data_valid(sys_dv));

  // ------------------------------------------------------------ links -> c0
  logic [N_LINKS-1:0][LINK_W-1:0] lword, aword;
  logic [N_LINKS-1:0]             lstb, lerr;
  logic [N_LINKS-1:0][BCID_W-1:0] abcid;

  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    link_demux u_dmx (.clk160(rx_clk[l]), .rst_n, .rx_byte(rx_byte[l]),
                      .rx_first(rx_first[l]), .word(lword[l]), .word_stb(lstb[l]));
    time_align u_ta (.wclk(rx_clk[l]), .we(lstb[l]), .wdata(lword[l]),
                     .clk, .rst_n, .sys_bcid, .delay(cfg.align_delay),
                     .rdata(aword[l]), .rbcid(abcid[l]), .err(lerr[l]));
  end

  // ------------------------------------------------------------ c1
  logic [N_LINKS-1:0][LINK_W-1:0] inj_words, w1;
  logic                           inj_active, inj1;
  logic [3:0]                     inj_ev;
  logic [BCID_W-1:0]              bcid1;

  injection_buffer u_inj (.clk, .rst_n, .wr_en(inj_wr), .wr_addr(inj_addr),
                          .wr_data(inj_data), .start(inj_start), .words(inj_words),
                          .active(inj_active), .ev(inj_ev));

  injection_mux u_imux (.clk, .rst_n, .test_mode(cfg.test_mode), .fibre(aword),
                        .inj(inj_words), .inj_active, .out(w1), .out_injected(inj1));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) bcid1 <= '0;
    else        bcid1 <= abcid[0];

  // decode the link words into hit maps
  logic [NY-1:0][NX1-1:0]  m1_1;
  logic [NY-1:0][NX3-1:0]  m2_1, m3_1;
  logic [NY-1:0][NX45-1:0] m4_1, m5_1;

  always_comb begin
    for (int r = 0; r < int'(NY); r++) begin
      for (int c = 0; c < int'(NX1); c++)
        m1_1[r][c] = (r < 2) ? w1[LNK_M1A][r * int'(NX1) + c]
                             : w1[LNK_M1B][(r - 2) * int'(NX1) + c];
      for (int c = 0; c < int'(NX45); c++) begin
        m4_1[r][c] = w1[LNK_M4][r * int'(NX45) + c];
        m5_1[r][c] = w1[LNK_M5][r * int'(NX45) + c];
      end
    end
  end

  strip_to_pad #(.NR(NY), .NC(NX3)) u_s2p_m2 (
    .strip_mode(1'b1), .hstrip(w1[LNK_M2][27:24]), .vstrip(w1[LNK_M2][23:0]),
    .pads_in('0), .pads(m2_1));
  strip_to_pad #(.NR(NY), .NC(NX3)) u_s2p_m3 (
    .strip_mode(1'b1), .hstrip(w1[LNK_M3][27:24]), .vstrip(w1[LNK_M3][23:0]),
    .pads_in('0), .pads(m3_1));

  // ------------------------------------------------------------ c2
  logic [NY-1:0][NX1-1:0]  m1_2;
  logic [NY-1:0][NX3-1:0]  m2_2, m3_2;
  logic [NY-1:0][NX45-1:0] m4_2, m5_2;
  logic [N_LINKS-1:0][LINK_W-1:0] w2;
  logic                    inj2;
  logic [BCID_W-1:0]       bcid2;
  nb_t                     nb_fmt;

  // border pads towards the neighbours, counted from the shared edge
  for (genvar r = 0; r < NY; r++) begin : g_fmt
    logic [NX1-1:0]  m1l, m1r;
    logic [NX3-1:0]  m2l, m2r;
    logic [NX45-1:0] m4l, m4r, m5l, m5r;
    for (genvar c = 0; c < NX1; c++) begin : g1
      assign m1l[c] = m1_1[r][c];
      assign m1r[c] = m1_1[r][NX1 - 1 - c];
    end
    for (genvar c = 0; c < NX3; c++) begin : g2
      assign m2l[c] = m2_1[r][c];
      assign m2r[c] = m2_1[r][NX3 - 1 - c];
    end
    for (genvar c = 0; c < NX45; c++) begin : g45
      assign m4l[c] = m4_1[r][c];
      assign m4r[c] = m4_1[r][NX45 - 1 - c];
      assign m5l[c] = m5_1[r][c];
      assign m5r[c] = m5_1[r][NX45 - 1 - c];
    end
    neighbour_format #(.N_IN(NX1), .N_OUT(EXT_M1)) u_f1l (.mode(cfg.nb_mode_l), .din(m1l), .dout(nb_fmt.left.m1[r]));
    neighbour_format #(.N_IN(NX1), .N_OUT(EXT_M1)) u_f1r (.mode(cfg.nb_mode_r), .din(m1r), .dout(nb_fmt.right.m1[r]));
    neighbour_format #(.N_IN(NX3), .N_OUT(EXT_M2)) u_f2l (.mode(cfg.nb_mode_l), .din(m2l), .dout(nb_fmt.left.m2[r]));
    neighbour_format #(.N_IN(NX3), .N_OUT(EXT_M2)) u_f2r (.mode(cfg.nb_mode_r), .din(m2r), .dout(nb_fmt.right.m2[r]));
    neighbour_format #(.N_IN(NX45), .N_OUT(EXT_45)) u_f4l (.mode(cfg.nb_mode_l), .din(m4l), .dout(nb_fmt.left.m4[r]));
    neighbour_format #(.N_IN(NX45), .N_OUT(EXT_45)) u_f4r (.mode(cfg.nb_mode_r), .din(m4r), .dout(nb_fmt.right.m4[r]));
    neighbour_format #(.N_IN(NX45), .N_OUT(EXT_45)) u_f5l (.mode(cfg.nb_mode_l), .din(m5l), .dout(nb_fmt.left.m5[r]));
    neighbour_format #(.N_IN(NX45), .N_OUT(EXT_45)) u_f5r (.mode(cfg.nb_mode_r), .din(m5r), .dout(nb_fmt.right.m5[r]));
  end

  always_comb begin
    nb_fmt.top    = '{m4: m4_1[NY-1], m5: m5_1[NY-1]};
    nb_fmt.bottom = '{m4: m4_1[0],    m5: m5_1[0]};
    for (int k = 0; k < int'(EXT_45); k++) begin
      nb_fmt.tl.m4[k] = m4_1[NY-1][k];
      nb_fmt.tl.m5[k] = m5_1[NY-1][k];
      nb_fmt.tr.m4[k] = m4_1[NY-1][int'(NX45) - 1 - k];
      nb_fmt.tr.m5[k] = m5_1[NY-1][int'(NX45) - 1 - k];
      nb_fmt.bl.m4[k] = m4_1[0][k];
      nb_fmt.bl.m5[k] = m5_1[0][k];
      nb_fmt.br.m4[k] = m4_1[0][int'(NX45) - 1 - k];
      nb_fmt.br.m5[k] = m5_1[0][int'(NX45) - 1 - k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m1_2 <= '0; m2_2 <= '0; m3_2 <= '0; m4_2 <= '0; m5_2 <= '0;
      w2 <= '0; inj2 <= 1'b0; bcid2 <= '0; nb_out <= '0;
    end else begin
      m1_2 <= m1_1; m2_2 <= m2_1; m3_2 <= m3_1; m4_2 <= m4_1; m5_2 <= m5_1;
      w2 <= w1; inj2 <= inj1; bcid2 <= bcid1; nb_out <= nb_fmt;
    end
  end

  // ------------------------------------------------------------ c3
  logic [NY-1:0][W1E-1:0]  m1e;
  logic [NY-1:0][W2E-1:0]  m2e;
  logic [NY+1:0][W45E-1:0] m4e, m5e;

  always_comb begin
    m1e = '0; m2e = '0; m4e = '0; m5e = '0;
    for (int r = 0; r < int'(NY); r++) begin
      for (int c = 0; c < int'(NX1); c++)  m1e[r][int'(EXT_M1) + c] = m1_2[r][c];
      for (int c = 0; c < int'(NX3); c++)  m2e[r][int'(EXT_M2) + c] = m2_2[r][c];
      for (int c = 0; c < int'(NX45); c++) begin
        m4e[r + 1][int'(EXT_45) + c] = m4_2[r][c];
        m5e[r + 1][int'(EXT_45) + c] = m5_2[r][c];
      end
      for (int k = 0; k < int'(EXT_M1); k++) begin
        m1e[r][int'(EXT_M1) - 1 - k]        = nb_in.left.m1[r][k];
        m1e[r][int'(EXT_M1 + NX1) + k]      = nb_in.right.m1[r][k];
      end
      for (int k = 0; k < int'(EXT_M2); k++) begin
        m2e[r][int'(EXT_M2) - 1 - k]        = nb_in.left.m2[r][k];
        m2e[r][int'(EXT_M2 + NX3) + k]      = nb_in.right.m2[r][k];
      end
      for (int k = 0; k < int'(EXT_45); k++) begin
        m4e[r + 1][int'(EXT_45) - 1 - k]    = nb_in.left.m4[r][k];
        m4e[r + 1][int'(EXT_45 + NX45) + k] = nb_in.right.m4[r][k];
        m5e[r + 1][int'(EXT_45) - 1 - k]    = nb_in.left.m5[r][k];
        m5e[r + 1][int'(EXT_45 + NX45) + k] = nb_in.right.m5[r][k];
      end
    end
    for (int c = 0; c < int'(NX45); c++) begin
      m4e[0][int'(EXT_45) + c]      = nb_in.bottom.m4[c];
      m5e[0][int'(EXT_45) + c]      = nb_in.bottom.m5[c];
      m4e[NY + 1][int'(EXT_45) + c] = nb_in.top.m4[c];
      m5e[NY + 1][int'(EXT_45) + c] = nb_in.top.m5[c];
    end
    for (int k = 0; k < int'(EXT_45); k++) begin
      m4e[0][int'(EXT_45) - 1 - k]         = nb_in.bl.m4[k];
      m5e[0][int'(EXT_45) - 1 - k]         = nb_in.bl.m5[k];
      m4e[0][int'(EXT_45 + NX45) + k]      = nb_in.br.m4[k];
      m5e[0][int'(EXT_45 + NX45) + k]      = nb_in.br.m5[k];
      m4e[NY + 1][int'(EXT_45) - 1 - k]    = nb_in.tl.m4[k];
      m5e[NY + 1][int'(EXT_45) - 1 - k]    = nb_in.tl.m5[k];
      m4e[NY + 1][int'(EXT_45 + NX45) + k] = nb_in.tr.m4[k];
      m5e[NY + 1][int'(EXT_45 + NX45) + k] = nb_in.tr.m5[k];
    end
  end

  track_t [N_M3-1:0] tracks;
  track_t            t0, t1;

  track_finder u_tf (.m1e, .m2e, .m3(m3_2), .m4e, .m5e,
                     .foi_m1(cfg.foi_m1), .foi_m2(cfg.foi_m2),
                     .foi_m4(cfg.foi_m4), .foi_m5(cfg.foi_m5), .tracks);

  cand_select_beam u_sel (.clk, .rst_n, .tracks, .c0(t0), .c1(t1), .dropped(sel_dropped));

  logic [N_LINKS-1:0][LINK_W-1:0] w3, w4;
  nb_t                            nb3, nb4;
  logic                           inj3, inj4;
  logic [BCID_W-1:0]              bcid3;

  // ------------------------------------------------------------ c4
  pt_lut u_lut (.clk, .rst_n, .c0(t0), .c1(t1), .wr_en(lut_wr), .wr_sel(lut_sel),
                .wr_addr(lut_addr), .wr_data(lut_data), .o0(cand0), .o1(cand1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w3 <= '0; w4 <= '0; nb3 <= '0; nb4 <= '0; inj3 <= 1'b0; inj4 <= 1'b0;
      bcid3 <= '0; cand_bcid <= '0;
    end else begin
      w3 <= w2; w4 <= w3; nb3 <= nb_in; nb4 <= nb3; inj3 <= inj2; inj4 <= inj3;
      bcid3 <= bcid2; cand_bcid <= bcid3;
    end
  end

  // ------------------------------------------------------------ L0 buffer
  logic [PU_L0_W-1:0] rec, rec_out;
  logic [BCID_W-1:0]  acc_bcid;
  logic               accept;
  logic [PU_EV_W-1:0] ev;

  assign rec = {w4, nb4, cand0, cand1, inj4, (PU_L0_W - REC_W)'(0)};

  l0_buffer #(.DW(PU_L0_W), .DEPTH(128)) u_l0 (.clk, .rst_n, .din(rec),
                                                .latency(cfg.l0_latency), .dout(rec_out));

  assign acc_bcid = bcid_sub(cand_bcid, int'(cfg.l0_latency) + 1);
  assign accept   = cfg.test_mode ? rec_out[PU_L0_W - REC_W] : l0_accept;
  assign ev       = {acc_bcid, rec_out};

  l0_derandomizer #(.EV_W(PU_EV_W), .DEPTH(16)) u_dr (
    .clk, .rst_n, .push(accept), .ev, .out(dr_out),
    .out_ready(cfg.test_mode ? dr_pop : ro_ready),
    .count(dr_count), .full(dr_full), .lost(dr_lost));

  assign ro = cfg.test_mode ? '0 : dr_out;

  capture_buffer #(.EV_W(PU_EV_W)) u_cap (.clk, .rst_n, .arm(cap_arm), .push(accept),
                                          .ev, .done(cap_done), .rd_idx(cap_idx),
                                          .rd_data(cap_data));

  // ------------------------------------------------------------ status
  logic [15:0] err_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_cnt      <= '0;
      align_err    <= 1'b0;
      dropped_seen <= 1'b0;
    end else begin
      align_err <= |lerr;
      if (|lerr && err_cnt != 16'hFFFF) err_cnt <= err_cnt + 1'b1;
      if (sel_dropped) dropped_seen <= 1'b1;
    end
  end

  assign errors = err_cnt;
  assign status = {dr_lost[7:0], sys_dv, dropped_seen, dr_full, dr_count == 0,
                   inj_ev == 4'd15, inj_active, cap_done, cfg.test_mode};

endmodule
