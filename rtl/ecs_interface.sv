// ecs_interface -- local-bus slave of a processing unit for the control system.
//
// The board's credit-card PC reaches every FPGA through a 16-bit local bus.
// This slave decodes it into the unit's configuration registers, the write
// ports of the pT look-up tables and of the injection buffer, and the read
// ports of the capture buffer, the derandomizer (test mode) and the status.
// The bus is taken here as already synchronous to the 40 MHz clock: one
// address/data pair per clock with a write or a read strobe; read data is
// returned on rdata the clock after the read strobe.
//
// Address map (word addresses):
//   0x0000 RW control: bit 0 test mode; writing bit 1 starts the injection
//          replay, bit 2 arms the capture buffer (both self-clearing)
//   0x0001 RW fields of interest: [3:0] M2, [5:4] M1, [9:8] M4, [13:12] M5
//   0x0002 RW time-alignment delay [3:0]      0x0003 RW L0 latency [6:0]
//   0x0004 RW neighbour formatting: [1:0] left, [3:2] right
//   0x0005 R  status word              0x0006 R  next derandomizer word (pops)
//   0x0007 R  error counter
//   0x1000-0x1FFF W pT table 0   0x2000-0x2FFF W pT table 1   (data [7:0])
//   0x3000-0x30FF W injection buffer {event, link, half}
//   0x4000-0x403F R capture buffer word
// A bus reaching the control registers, tables, injection and capture buffers
// is the paper's; the address map, reset values and bus timing are this
// design's choice.
module ecs_interface
  import l0mu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // local bus
  input  logic [15:0]       addr,
  input  logic [15:0]       wdata,
  input  logic              wr,
  input  logic              rd,
  output logic [15:0]       rdata,
  // configuration
  output pu_cfg_t           cfg,
  output logic              inj_start,
  output logic              cap_arm,
  // table and buffer write ports
  output logic              lut_wr,
  output logic              lut_sel,
  output logic [LUT_AW-1:0] lut_addr,
  output logic [7:0]        lut_data,
  output logic              inj_wr,
  output logic [7:0]        inj_addr,
  output logic [15:0]       inj_data,
  // read sources
  output logic [5:0]        cap_idx,
  input  logic [15:0]       cap_data,
  input  logic [15:0]       status,
  input  logic [15:0]       errors,
  input  logic [15:0]       dr_data,
  output logic              dr_pop
);

  logic [3:0] page;
  assign page = addr[15:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '{test_mode: 1'b0, align_delay: 4'd4, l0_latency: 7'd105,
               foi_m2: 4'd3, foi_m1: 2'd2, foi_m4: 2'd1, foi_m5: 2'd1,
               nb_mode_l: NBF_SAME, nb_mode_r: NBF_SAME};
      inj_start <= 1'b0;
      cap_arm   <= 1'b0;
    end else begin
      inj_start <= 1'b0;
      cap_arm   <= 1'b0;
      if (wr && page == 4'h0) begin
        unique case (addr[11:0])
          12'h000: begin
            cfg.test_mode <= wdata[0];
            inj_start     <= wdata[1];
            cap_arm       <= wdata[2];
          end
          12'h001: begin
            cfg.foi_m2 <= wdata[3:0];
            cfg.foi_m1 <= wdata[5:4];
            cfg.foi_m4 <= wdata[9:8];
            cfg.foi_m5 <= wdata[13:12];
          end
          12'h002: cfg.align_delay <= wdata[3:0];
          12'h003: cfg.l0_latency  <= wdata[6:0];
          12'h004: {cfg.nb_mode_r, cfg.nb_mode_l} <= wdata[3:0];
          default: ;
        endcase
      end
    end
  end

  // write ports of the memories
  assign lut_wr   = wr && (page == 4'h1 || page == 4'h2);
  assign lut_sel  = page == 4'h2;
  assign lut_addr = addr[LUT_AW-1:0];
  assign lut_data = wdata[7:0];
  assign inj_wr   = wr && page == 4'h3 && addr[11:8] == 4'h0;
  assign inj_addr = addr[7:0];
  assign inj_data = wdata;

  assign cap_idx = addr[5:0];
  assign dr_pop  = rd && addr == 16'h0006;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata <= '0;
    else if (rd) begin
      unique casez (addr)
        16'h0000: rdata <= {15'h0, cfg.test_mode};
        16'h0001: rdata <= {2'b00, cfg.foi_m5, 2'b00, cfg.foi_m4, 2'b00, cfg.foi_m1, cfg.foi_m2};
        16'h0002: rdata <= {12'h0, cfg.align_delay};
        16'h0003: rdata <= {9'h0, cfg.l0_latency};
        16'h0004: rdata <= {12'h0, cfg.nb_mode_r, cfg.nb_mode_l};
        16'h0005: rdata <= status;
        16'h0006: rdata <= dr_data;
        16'h0007: rdata <= errors;
        16'h40??: rdata <= cap_data;
        default:  rdata <= 16'hDEAD;
      endcase
    end
  end

endmodule
