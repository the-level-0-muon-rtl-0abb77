// controller_board -- control unit, slave unit and the crate's timing.
//
// The controller board receives the two candidate links of each processing
// board: the first links go to the control unit (CU), the second to the
// slave unit (SU).  The CU picks the two candidates of highest pT and both
// units send their half of the answer to the Level-0 decision unit.  The
// board also broadcasts the TTC signals decoded by its TTC receiver (the
// orbit signal bc0 and the Level-0 accept) to the whole crate; here they
// are re-registered once and sent to the processing boards and to the CU
// and SU, so that all FPGAs see them on the same clock.
//
// Interface: clk, clk160, rst_n, ttc_bc0, ttc_l0_accept (from the TTC
// receiver), cu_l0_latency, su_l0_latency (each unit's
// record reaches its L0 buffer at its own pipeline depth), align_delay, spyd_mode; bc0/l0_accept to the crate;
// candidate link bytes per board for CU and SU; two words to the L0 decision
// unit; sync and Spyd status; two DAQ streams.
// The split of the work between CU and SU and the TTC broadcast are the
// paper's; the one-clock broadcast register is this design's choice.
module controller_board
  import l0mu_pkg::*;
#(
  parameter int unsigned NB = 12
) (
  input  logic                        clk,
  input  logic                        clk160,
  input  logic                        rst_n,
  input  logic                        ttc_bc0,
  input  logic                        ttc_l0_accept,
  input  logic [6:0]                  cu_l0_latency,
  input  logic [6:0]                  su_l0_latency,
  input  logic [3:0]                  align_delay,
  input  logic                        spyd_mode,
  output logic                        bc0,
  output logic                        l0_accept,
  input  logic [NB-1:0][7:0]          cu_rx_byte,
  input  logic [NB-1:0]               cu_rx_first,
  input  logic [NB-1:0][7:0]          su_rx_byte,
  input  logic [NB-1:0]               su_rx_first,
  output logic [1:0][LINK_W-1:0]      l0du_word,
  output logic [1:0][15:0]            sync_err,
  output logic [2*NB-1:0]             spyd_no_sync,
  output logic [2*NB-1:0][15:0]       spyd_errors,
  output logic [2*NB-1:0][23:0]       spyd_addr,
  output ro_word_t [1:0]              daq,
  input  logic [1:0]                  daq_ready
);

  localparam int unsigned SW = $clog2(2 * NB);

  logic [SW-1:0] sel0, sel1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bc0       <= 1'b0;
      l0_accept <= 1'b0;
    end else begin
      bc0       <= ttc_bc0;
      l0_accept <= ttc_l0_accept;
    end

  control_unit #(.NB(NB)) u_cu (
    .clk, .clk160, .rst_n, .bc0, .l0_accept, .l0_latency(cu_l0_latency), .align_delay,
    .spyd_mode, .rx_byte(cu_rx_byte), .rx_first(cu_rx_first), .l0du_word(l0du_word[0]),
    .sel0, .sel1, .sync_err(sync_err[0]),
    .spyd_no_sync(spyd_no_sync[NB-1:0]), .spyd_errors(spyd_errors[NB-1:0]),
    .spyd_addr(spyd_addr[NB-1:0]), .daq(daq[0]), .daq_ready(daq_ready[0]));

  slave_unit #(.NB(NB)) u_su (
    .clk, .clk160, .rst_n, .bc0, .l0_accept, .l0_latency(su_l0_latency), .align_delay,
    .spyd_mode, .rx_byte(su_rx_byte), .rx_first(su_rx_first), .sel0, .sel1,
    .l0du_word(l0du_word[1]), .sync_err(sync_err[1]),
    .spyd_no_sync(spyd_no_sync[2*NB-1:NB]), .spyd_errors(spyd_errors[2*NB-1:NB]),
    .spyd_addr(spyd_addr[2*NB-1:NB]), .daq(daq[1]), .daq_ready(daq_ready[1]));

endmodule
