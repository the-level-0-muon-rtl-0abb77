// injection_buffer -- test-pattern memory that mimics the optical link inputs.
//
// Used only to debug a processing unit or a board.  The control system loads
// the link words of N_EVENTS consecutive crossings through 16-bit writes; a
// start pulse then replays them, one crossing per clock, on all links at once.
// While the replay runs, active is high and ev gives the event number.
//
// Interface: ECS write port (clk domain) wr_en, wr_addr = {event, link, half},
// wr_data (half 1 is bits 31:16 of the link word); start; words (all links of
// the current event), active, ev.  Timing: the first event appears one clock
// after start and the replay lasts N_EVENTS clocks.
// The 16-event depth is the paper's; the address map and the one-event-per-
// clock replay are this design's choice.
module injection_buffer
  import l0mu_pkg::*;
#(
  parameter int unsigned N_EVENTS = 16,
  parameter int unsigned NL       = N_LINKS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            wr_en,
  input  logic [$clog2(N_EVENTS)+$clog2(NL):0] wr_addr,
  input  logic [RO_W-1:0]                 wr_data,
  input  logic                            start,
  output logic [NL-1:0][LINK_W-1:0]       words,
  output logic                            active,
  output logic [$clog2(N_EVENTS)-1:0]     ev
);

  localparam int unsigned EW = $clog2(N_EVENTS);
  localparam int unsigned LW = $clog2(NL);

  logic [NL-1:0][1:0][RO_W-1:0] mem [N_EVENTS];
  logic [EW-1:0] e_w;
  logic [LW-1:0] l_w;
  logic          h_w;

  assign {e_w, l_w, h_w} = wr_addr;

  always_ff @(posedge clk)
    if (wr_en) mem[e_w][l_w][h_w] <= wr_data;

  logic          run;
  logic [EW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      cnt    <= '0;
      active <= 1'b0;
      ev     <= '0;
      words  <= '0;
    end else begin
      active <= 1'b0;
      if (start && !run) begin
        run <= 1'b1;
        cnt <= '0;
      end else if (run) begin
        words  <= mem[cnt];
        active <= 1'b1;
        ev     <= cnt;
        cnt    <= cnt + 1'b1;
        if (cnt == EW'(N_EVENTS - 1)) run <= 1'b0;
      end
    end
  end

endmodule
