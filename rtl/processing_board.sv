// processing_board -- four processing units and one BCSU.
//
// The four PUs handle four neighbouring towers arranged as a 2 x 2 matrix:
// PU 0 left-bottom, PU 1 right-bottom, PU 2 left-top, PU 3 right-top.  The
// board wires the on-board neighbour exchange: the left and right columns
// exchange their x borders, the top and bottom rows their y borders, and
// the diagonal pairs (left-top with right-bottom, left-bottom with
// right-top) their corners.  Every other part of a PU's neighbour input
// comes from other boards through the backplane (nb_ext_in; its on-board
// fields are ignored), and every PU's border output is offered to the
// backplane (nb_out).  The BCSU selects the board's two best candidates,
// sends them to the controller board and drains the L0 derandomizers to the
// DAQ.  The control system reaches one FPGA at a time: ecs_sel picks the PU.
//
// Interface: clk (40 MHz), clk160, rst_n, bc0, l0_accept, l0_latency (BCSU),
// slot, spyd_mode; optical inputs per PU and link; nb_ext_in/nb_out per PU;
// two candidate links to the controller (bytes at 160 MHz); two DAQ streams;
// ECS local bus.  Timing: see processing_unit and bcsu.
// Four PUs and a BCSU per board, the 2 x 2 arrangement and its links are the
// paper's; the numbering of the PUs and the ECS select are this design's.
module processing_board
  import l0mu_pkg::*;
(
  input  logic                              clk,
  input  logic                              clk160,
  input  logic                              rst_n,
  input  logic                              bc0,
  input  logic                              l0_accept,
  input  logic [6:0]                        l0_latency,
  input  logic [7:0]                        slot,
  input  logic                              spyd_mode,
  input  logic [3:0][N_LINKS-1:0]           rx_clk,
  input  logic [3:0][N_LINKS-1:0][7:0]      rx_byte,
  input  logic [3:0][N_LINKS-1:0]           rx_first,
  input  nb_t  [3:0]                        nb_ext_in,
  output nb_t  [3:0]                        nb_out,
  output logic [1:0][7:0]                   tx_byte,
  output logic [1:0]                        tx_first,
  output ro_word_t [1:0]                    daq,
  input  logic [1:0]                        daq_ready,
  input  logic [1:0]                        ecs_sel,
  input  logic [15:0]                       ecs_addr,
  input  logic [15:0]                       ecs_wdata,
  input  logic                              ecs_wr,
  input  logic                              ecs_rd,
  output logic [15:0]                       ecs_rdata,
  output logic [3:0]                        align_err
);

  nb_t   [3:0]              nb_in;
  cand_t [3:0][1:0]         cand;
  logic  [3:0][BCID_W-1:0]  cand_bcid;
  ro_word_t [3:0]           pu_ro;
  logic  [3:0]              pu_ro_ready;
  logic  [3:0][15:0]        rdata;

  // on-board exchange (col = p % 2, row = p / 2)
  always_comb begin
    nb_in = nb_ext_in;
    nb_in[1].left   = nb_out[0].right;   nb_in[0].right  = nb_out[1].left;
    nb_in[3].left   = nb_out[2].right;   nb_in[2].right  = nb_out[3].left;
    nb_in[0].top    = nb_out[2].bottom;  nb_in[2].bottom = nb_out[0].top;
    nb_in[1].top    = nb_out[3].bottom;  nb_in[3].bottom = nb_out[1].top;
    nb_in[1].tl     = nb_out[2].br;      nb_in[2].br     = nb_out[1].tl;
    nb_in[0].tr     = nb_out[3].bl;      nb_in[3].bl     = nb_out[0].tr;
  end

  for (genvar p = 0; p < 4; p++) begin : g_pu
    processing_unit u_pu (
      .clk, .rst_n, .bc0, .l0_accept,
      .rx_clk(rx_clk[p]), .rx_byte(rx_byte[p]), .rx_first(rx_first[p]),
      .nb_in(nb_in[p]), .nb_out(nb_out[p]),
      .cand0(cand[p][0]), .cand1(cand[p][1]), .cand_bcid(cand_bcid[p]),
      .ro(pu_ro[p]), .ro_ready(pu_ro_ready[p]),
      .ecs_addr, .ecs_wdata, .ecs_wr(ecs_wr && ecs_sel == 2'(p)),
      .ecs_rd(ecs_rd && ecs_sel == 2'(p)), .ecs_rdata(rdata[p]),
      .align_err(align_err[p]));
  end

  assign ecs_rdata = rdata[ecs_sel];

  bcsu u_bcsu (
    .clk, .clk160, .rst_n, .l0_accept, .l0_latency, .slot, .spyd_mode,
    .cand, .cand_bcid(cand_bcid[0]), .pu_ro, .pu_ro_ready,
    .tx_byte, .tx_first, .daq, .daq_ready);

endmodule
