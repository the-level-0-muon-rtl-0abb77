// neighbour_format -- adapts a border hit map to a neighbour's granularity.
//
// A processing unit sends the pads along one edge of its tower to the unit
// next to it.  When the two towers have logical pads of different widths the
// map is reformatted on the way, so that the receiver runs its track finding
// on pads of its own size.  Three modes exist:
//   NBF_SAME   the N_OUT pads nearest the edge are sent unchanged;
//   NBF_COARSE receiver pads are twice as wide: pads are OR-ed in pairs;
//   NBF_FINE   receiver pads are half as wide: every pad is sent twice.
// Columns are counted from the edge (index 0 is the pad touching the edge);
// pads past the end of the source row are sent as 0.  Purely combinational.
//
// The formatting step is the paper's; the three modes and the OR rule for
// merging pads are this design's choice.
module neighbour_format
  import l0mu_pkg::*;
#(
  parameter int unsigned N_IN  = 12,
  parameter int unsigned N_OUT = 8
) (
  input  logic [1:0]       mode,
  input  logic [N_IN-1:0]  din,          // din[0] touches the edge
  output logic [N_OUT-1:0] dout          // dout[0] touches the edge
);

  function automatic logic pick(input logic [N_IN-1:0] v, input int unsigned i);
    return (i < N_IN) ? v[i] : 1'b0;
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < N_OUT; k++) begin
      unique case (mode)
        NBF_COARSE: dout[k] = pick(din, 2 * k) | pick(din, 2 * k + 1);
        NBF_FINE:   dout[k] = pick(din, k / 2);
        default:    dout[k] = pick(din, k);
      endcase
    end
  end

endmodule
