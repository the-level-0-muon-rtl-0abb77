// l0_buffer -- pipeline memory that waits for the Level-0 decision.
//
// The Level-0 decision for a crossing arrives a fixed number of crossings
// later.  Every clock the block writes the crossing's record (the inputs and
// results of the processing element, DW bits) into a circular memory of DEPTH
// words and reads back the record written `latency` clocks earlier, so that
// the record of the crossing being decided is on dout when its decision
// arrives.  The latency is a register of the control system (105 crossings
// in the experiment; it must be between 1 and DEPTH-1).
//
// Interface: clk, rst_n, din, latency; dout.  Timing: dout in the cycle after
// edge k holds din sampled at edge k - latency.
// Width 532 and depth 128 are the paper's; the read-behind-write addressing
// is this design's choice.
module l0_buffer #(
  parameter int unsigned DW    = 532,
  parameter int unsigned DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [DW-1:0]            din,
  input  logic [$clog2(DEPTH)-1:0] latency,
  output logic [DW-1:0]            dout
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr;

  always_ff @(posedge clk) begin
    mem[wptr] <= din;
    dout      <= mem[wptr - latency];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) wptr <= '0;
    else        wptr <= wptr + 1'b1;

endmodule
