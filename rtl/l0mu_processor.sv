// l0mu_processor -- Level-0 muon processor of one detector quadrant.
//
// A quadrant is cut into 48 towers that point to the interaction point; each
// tower is processed by one processing unit (PU).  Twelve processing boards
// of four PUs and one controller board share a crate whose backplane
// carries the neighbour exchange between boards, the candidate links to the
// controller board and the broadcast timing signals.  This module is that
// crate: NBX x NBY processing boards, the controller board and the
// backplane wiring.
//
// Tower grid: board b sits at column b % NBX and row b / NBX; its PUs form a
// 2 x 2 block, so the PUs form a (2*NBX) x (2*NBY) grid of towers.  Every PU
// exchanges border pads with its eight grid neighbours (on the board or
// through the backplane); towers on the edge of the quadrant receive zeros
// from outside.  In the experiment the four regions of a quadrant have pad
// sizes differing by factors of two and the exchange topology depends on
// each tower; this module uses a uniform grid and lets each PU's ECS
// formatting mode describe a change of granularity.
//
// Per crossing (25 ns): optical links in (8 per PU, bytes at 160 MHz), two
// 32-bit words to the Level-0 decision unit out (from the control and slave
// units: the two candidates of highest pT of the quadrant).  On a Level-0
// accept every FPGA's L0 event goes to its DAQ stream.
//
// Interface: clk (40 MHz system clock), clk160 (link byte clock), rst_n;
// ttc_bc0/ttc_l0_accept from the TTC receiver; the L0 latencies of the
// BCSUs, CU and SU; the CU/SU time-alignment delay; spyd_mode (link test);
// per board: optical inputs, DAQ streams, an ECS local bus with FPGA select
// and alignment errors; L0 decision unit words; controller status.
// The crate organisation is the paper's; the uniform tower grid and the
// port-level form of the TTC, ECS and DAQ connections are this design's.
module l0mu_processor
  import l0mu_pkg::*;
#(
  parameter int unsigned NBX = 3,
  parameter int unsigned NBY = 4
) (
  input  logic                                   clk,
  input  logic                                   clk160,
  input  logic                                   rst_n,
  input  logic                                   ttc_bc0,
  input  logic                                   ttc_l0_accept,
  input  logic [6:0]                             bcsu_l0_latency,
  input  logic [6:0]                             cu_l0_latency,
  input  logic [6:0]                             su_l0_latency,
  input  logic [3:0]                             align_delay,
  input  logic                                   spyd_mode,
  input  logic [NBX*NBY-1:0][3:0][N_LINKS-1:0]      rx_clk,
  input  logic [NBX*NBY-1:0][3:0][N_LINKS-1:0][7:0] rx_byte,
  input  logic [NBX*NBY-1:0][3:0][N_LINKS-1:0]      rx_first,
  input  logic [NBX*NBY-1:0][1:0]                ecs_sel,
  input  logic [NBX*NBY-1:0][15:0]               ecs_addr,
  input  logic [NBX*NBY-1:0][15:0]               ecs_wdata,
  input  logic [NBX*NBY-1:0]                     ecs_wr,
  input  logic [NBX*NBY-1:0]                     ecs_rd,
  output logic [NBX*NBY-1:0][15:0]               ecs_rdata,
  output logic [NBX*NBY-1:0][3:0]                align_err,
  output ro_word_t [NBX*NBY-1:0][1:0]            daq_board,
  input  logic [NBX*NBY-1:0][1:0]                daq_board_ready,
  output ro_word_t [1:0]                         daq_ctrl,
  input  logic [1:0]                             daq_ctrl_ready,
  output logic [1:0][LINK_W-1:0]                 l0du_word,
  output logic [1:0][15:0]                       sync_err,
  output logic [2*NBX*NBY-1:0]                   spyd_no_sync,
  output logic [2*NBX*NBY-1:0][15:0]             spyd_errors,
  output logic [2*NBX*NBY-1:0][23:0]             spyd_addr
);

  localparam int NB = NBX * NBY;
  localparam int GX = 2 * NBX;
  localparam int GY = 2 * NBY;

  logic                        bc0, l0_accept;
  nb_t  [NB-1:0][3:0]          nb_out, nb_ext_in;
  logic [NB-1:0][1:0][7:0]     tx_byte;
  logic [NB-1:0][1:0]          tx_first;
  logic [NB-1:0][7:0]          cu_rx_byte, su_rx_byte;
  logic [NB-1:0]               cu_rx_first, su_rx_first;

  // ------------------------------------------------------------ backplane
  function automatic int bidx(input int gx, input int gy);
    return (gy / 2) * int'(NBX) + gx / 2;
  endfunction
  function automatic int pidx(input int gx, input int gy);
    return (gy % 2) * 2 + gx % 2;
  endfunction

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      for (int p = 0; p < 4; p++) begin
        automatic int gx = (b % int'(NBX)) * 2 + p % 2;
        automatic int gy = (b / int'(NBX)) * 2 + p / 2;
        nb_ext_in[b][p] = '0;
        if (gx > 0)
          nb_ext_in[b][p].left   = nb_out[bidx(gx - 1, gy)][pidx(gx - 1, gy)].right;
        if (gx < GX - 1)
          nb_ext_in[b][p].right  = nb_out[bidx(gx + 1, gy)][pidx(gx + 1, gy)].left;
        if (gy < GY - 1)
          nb_ext_in[b][p].top    = nb_out[bidx(gx, gy + 1)][pidx(gx, gy + 1)].bottom;
        if (gy > 0)
          nb_ext_in[b][p].bottom = nb_out[bidx(gx, gy - 1)][pidx(gx, gy - 1)].top;
        if (gx > 0 && gy < GY - 1)
          nb_ext_in[b][p].tl = nb_out[bidx(gx - 1, gy + 1)][pidx(gx - 1, gy + 1)].br;
        if (gx < GX - 1 && gy < GY - 1)
          nb_ext_in[b][p].tr = nb_out[bidx(gx + 1, gy + 1)][pidx(gx + 1, gy + 1)].bl;
        if (gx > 0 && gy > 0)
          nb_ext_in[b][p].bl = nb_out[bidx(gx - 1, gy - 1)][pidx(gx - 1, gy - 1)].tr;
        if (gx < GX - 1 && gy > 0)
          nb_ext_in[b][p].br = nb_out[bidx(gx + 1, gy - 1)][pidx(gx + 1, gy - 1)].tl;
      end
    end
  end

  always_comb
    for (int b = 0; b < NB; b++) begin
      cu_rx_byte[b]  = tx_byte[b][0];
      cu_rx_first[b] = tx_first[b][0];
      su_rx_byte[b]  = tx_byte[b][1];
      su_rx_first[b] = tx_first[b][1];
    end

  // ------------------------------------------------------------ boards
  for (genvar b = 0; b < NB; b++) begin : g_board
    processing_board u_board (
      .clk, .clk160, .rst_n, .bc0, .l0_accept, .l0_latency(bcsu_l0_latency),
      .slot(8'(b)), .spyd_mode,
      .rx_clk(rx_clk[b]), .rx_byte(rx_byte[b]), .rx_first(rx_first[b]),
      .nb_ext_in(nb_ext_in[b]), .nb_out(nb_out[b]),
      .tx_byte(tx_byte[b]), .tx_first(tx_first[b]),
      .daq(daq_board[b]), .daq_ready(daq_board_ready[b]),
      .ecs_sel(ecs_sel[b]), .ecs_addr(ecs_addr[b]), .ecs_wdata(ecs_wdata[b]),
      .ecs_wr(ecs_wr[b]), .ecs_rd(ecs_rd[b]), .ecs_rdata(ecs_rdata[b]),
      .align_err(align_err[b]));
  end

  controller_board #(.NB(NB)) u_ctrl (
    .clk, .clk160, .rst_n, .ttc_bc0, .ttc_l0_accept, .cu_l0_latency, .su_l0_latency,
    .align_delay, .spyd_mode, .bc0, .l0_accept,
    .cu_rx_byte, .cu_rx_first, .su_rx_byte, .su_rx_first,
    .l0du_word, .sync_err, .spyd_no_sync, .spyd_errors, .spyd_addr,
    .daq(daq_ctrl), .daq_ready(daq_ctrl_ready));

endmodule
