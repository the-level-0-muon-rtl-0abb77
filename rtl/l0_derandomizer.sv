// l0_derandomizer -- FIFO of accepted events and their 16-bit readout.
//
// Level-0 accepts arrive at random times (on average 1 MHz).  Each accepted
// event (EV_W bits, the BCID in its top 12 bits) is pushed into a FIFO of
// DEPTH events and sent out as EV_W/16 words of 16 bits, most significant
// first, one word per clock while the receiver is ready.  A 544-bit PU event
// takes 34 clocks, i.e. a sustained rate of 40 MHz / 34 = 1.18 MHz, above
// the 1.1 MHz maximum trigger rate.  An accept that finds the FIFO full is
// dropped and counted in lost.
//
// Interface: clk, rst_n, push, ev; out (valid, last, data), out_ready;
// count, full, lost.  Timing: the first word of an event is on out the clock
// after it is pushed into an empty FIFO.
// Depth 16, the 16-bit words and the 34-word PU event are the paper's; the
// word order and the drop-on-full rule are this design's choice.
module l0_derandomizer
  import l0mu_pkg::*;
#(
  parameter int unsigned EV_W  = PU_EV_W,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [EV_W-1:0]            ev,
  output ro_word_t                   out,
  input  logic                       out_ready,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       full,
  output logic [15:0]                lost
);

  localparam int unsigned NW = EV_W / RO_W;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned WW = $clog2(NW);

  logic [EV_W-1:0] mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [WW-1:0]   widx;
  logic            pop_ev;

  assign full      = count == ($clog2(DEPTH) + 1)'(DEPTH);
  assign out.valid = count != 0;
  assign out.last  = widx == WW'(NW - 1);
  assign out.data  = mem[rptr][EV_W - 1 - RO_W * int'(widx) -: RO_W];
  assign pop_ev    = out.valid && out_ready && out.last;

  always_ff @(posedge clk)
    if (push && !full) mem[wptr] <= ev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      widx  <= '0;
      count <= '0;
      lost  <= '0;
    end else begin
      if (push && !full) wptr <= wptr + 1'b1;
      if (push && full && lost != 16'hFFFF) lost <= lost + 1'b1;
      if (out.valid && out_ready) widx <= out.last ? '0 : widx + 1'b1;
      if (pop_ev) rptr <= rptr + 1'b1;
      count <= count + (($clog2(DEPTH) + 1)'(push && !full)) - (($clog2(DEPTH) + 1)'(pop_ev));
    end
  end

endmodule
