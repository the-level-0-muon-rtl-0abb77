// bcid_counter -- bunch crossing identifier of the 40 MHz system clock.
//
// Counts crossings 0..3563 (one LHC orbit) and wraps.  The orbit signal bc0,
// broadcast by the controller board from the TTC system, forces the count to 0
// on the next clock so that every FPGA of the crate carries the same number.
// data_valid is high during crossing 0: it marks the start of an LHC cycle and
// travels with the data on the point-to-point links.
//
// Interface: clk (40 MHz), rst_n (asynchronous, active low), bc0 (one clock).
// Timing: bcid changes one clock after the edge at which bc0 is sampled.
// The 0..3563 range follows the paper; reset to 0 and the bc0 behaviour are
// this design's choice.
module bcid_counter
  import l0mu_pkg::*;
#(
  parameter int unsigned BX = BX_PER_ORBIT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bc0,
  output logic [BCID_W-1:0] bcid,
  output logic              data_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      bcid <= '0;
    else if (bc0)                    bcid <= '0;
    else if (bcid == BCID_W'(BX - 1)) bcid <= '0;
    else                             bcid <= bcid + 1'b1;
  end

  assign data_valid = (bcid == '0);

endmodule
