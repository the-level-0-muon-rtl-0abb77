// injection_mux -- chooses the input of the core processing.
//
// In normal running the time-aligned fibre words go through.  In test mode
// the injection buffer's words replace them while its replay is active, and
// the crossings in between carry empty words (no hits) so that only injected
// events are processed.  A flag tells downstream logic which crossings were
// injected.  The output is registered.
//
// Interface: clk, rst_n, test_mode, fibre words, inj words, inj_active; out
// words, out_injected.  Latency: one clock.
// The multiplexer is named in the paper's block diagram; zeroing the words
// between injected events is this design's choice.
module injection_mux
  import l0mu_pkg::*;
#(
  parameter int unsigned NL = N_LINKS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      test_mode,
  input  logic [NL-1:0][LINK_W-1:0] fibre,
  input  logic [NL-1:0][LINK_W-1:0] inj,
  input  logic                      inj_active,
  output logic [NL-1:0][LINK_W-1:0] out,
  output logic                      out_injected
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out          <= '0;
      out_injected <= 1'b0;
    end else if (!test_mode) begin
      out          <= fibre;
      out_injected <= 1'b0;
    end else begin
      out          <= inj_active ? inj : '0;
      out_injected <= inj_active;
    end
  end

endmodule
