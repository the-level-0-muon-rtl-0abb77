// daq_readout -- merges the derandomizers of several units onto one DAQ link.
//
// Every unit of a board holds, in its derandomizer, the same sequence of
// accepted events.  For one DAQ link this block waits until each of its N
// sources offers an event, then forwards the 16-bit words of source 0's
// event, then source 1's, and so on, one word per clock while the link is
// ready.  out.last marks the last word of the last source, that is the end
// of the board's fragment for the event.
//
// Interface: clk, rst_n, src[N] (valid, last, data) with src_ready[N]; out,
// out_ready.  Timing: combinational pass-through of the selected source; the
// source index advances on the source's last word.
// Draining the derandomizers towards the DAQ is the paper's; the fixed order
// and the wait for all sources are this design's choice.
module daq_readout
  import l0mu_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ro_word_t [N-1:0]      src,
  output logic     [N-1:0]      src_ready,
  output ro_word_t              out,
  input  logic                  out_ready
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          busy;
  logic [IW-1:0] cur;
  logic          all_valid;

  always_comb begin
    all_valid = 1'b1;
    for (int i = 0; i < int'(N); i++) all_valid &= src[i].valid;
  end

  always_comb begin
    src_ready = '0;
    out       = '0;
    if (busy) begin
      out.valid      = src[cur].valid;
      out.data       = src[cur].data;
      out.last       = src[cur].last && (cur == IW'(N - 1));
      src_ready[cur] = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cur  <= '0;
    end else if (!busy) begin
      if (all_valid) begin
        busy <= 1'b1;
        cur  <= '0;
      end
    end else if (src[cur].valid && out_ready && src[cur].last) begin
      if (cur == IW'(N - 1)) busy <= 1'b0;
      else                   cur  <= cur + 1'b1;
    end
  end

endmodule
