// capture_buffer -- snapshot of one accepted event for the control system.
//
// During data taking the derandomizer belongs to the data acquisition, so
// the control system cannot read it.  Instead it arms this buffer; the next
// accepted event written into the derandomizer is also copied here and done
// is raised.  The control system then reads it as EV_W/16 words of 16 bits,
// word 0 being the most significant, and may re-arm.
//
// Interface: clk, rst_n, arm, push, ev; done, rd_idx, rd_data (combinational
// read).  Timing: done rises the clock after the captured push.
// The snapshot of one accepted event is the paper's; arm/done and the word
// order are this design's choice.
module capture_buffer
  import l0mu_pkg::*;
#(
  parameter int unsigned EV_W = PU_EV_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            arm,
  input  logic                            push,
  input  logic [EV_W-1:0]                 ev,
  output logic                            done,
  input  logic [$clog2(EV_W / RO_W)-1:0]  rd_idx,
  output logic [RO_W-1:0]                 rd_data
);

  logic [EV_W-1:0] snap;
  logic            armed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap  <= '0;
      armed <= 1'b0;
      done  <= 1'b0;
    end else if (arm) begin
      armed <= 1'b1;
      done  <= 1'b0;
    end else if (armed && push) begin
      snap  <= ev;
      armed <= 1'b0;
      done  <= 1'b1;
    end
  end

  assign rd_data = (int'(rd_idx) < int'(EV_W / RO_W))
                 ? snap[EV_W - 1 - RO_W * int'(rd_idx) -: RO_W] : '0;

endmodule
