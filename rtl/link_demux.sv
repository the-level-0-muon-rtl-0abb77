// link_demux -- receive-side word builder of a 1.6 Gbps link.
//
// The transceiver delivers the deserialised link as 8-bit bytes at 160 MHz.
// Four consecutive bytes, most significant first, form the 32-bit word sent
// every 25 ns.  rx_first marks the first byte of a word (the word alignment a
// transceiver recovers from its comma characters; its source is outside this
// block).  When the fourth byte arrives, word is updated and word_stb pulses
// for one 160 MHz clock.
//
// Interface: clk160 (the link's recovered byte clock), rst_n, rx_byte,
// rx_first; word, word_stb.  Latency: word is valid one clock after byte 3.
// The 8-bit/160 MHz to 32-bit/40 MHz conversion follows the paper; the byte
// order and the rx_first marker are this design's choice.
module link_demux
  import l0mu_pkg::*;
(
  input  logic              clk160,
  input  logic              rst_n,
  input  logic [7:0]        rx_byte,
  input  logic              rx_first,
  output logic [LINK_W-1:0] word,
  output logic              word_stb
);

  logic [1:0]  idx;
  logic [23:0] acc;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      idx      <= '0;
      acc      <= '0;
      word     <= '0;
      word_stb <= 1'b0;
    end else begin
      word_stb <= 1'b0;
      if (rx_first) begin
        acc <= {16'h0, rx_byte};
        idx <= 2'd1;
      end else begin
        unique case (idx)
          2'd1, 2'd2: begin
            acc <= {acc[15:0], rx_byte};
            idx <= idx + 1'b1;
          end
          2'd3: begin
            word     <= {acc, rx_byte};
            word_stb <= 1'b1;
            idx      <= 2'd0;
          end
          default: ;                               // waiting for a first byte
        endcase
      end
    end
  end

endmodule
