// link_mux -- transmit-side byte multiplexer of a 1.6 Gbps link.
//
// A 32-bit word presented once per 40 MHz crossing is sent to the transceiver
// as four bytes at 160 MHz, most significant first.  word_stb (one 160 MHz
// clock wide, once per crossing) loads the word; the following four clocks
// carry its bytes with tx_first on the first one.  Between words tx_byte
// holds 0.
//
// Interface: clk160, rst_n, word, word_stb; tx_byte, tx_first.
// Latency: byte 0 appears one clock after word_stb.  The 32-bit/40 MHz to
// 8-bit/160 MHz conversion is the paper's; byte order is this design's choice.
module link_mux
  import l0mu_pkg::*;
(
  input  logic              clk160,
  input  logic              rst_n,
  input  logic [LINK_W-1:0] word,
  input  logic              word_stb,
  output logic [7:0]        tx_byte,
  output logic              tx_first
);

  logic [LINK_W-1:0] sh;
  logic [2:0]        left;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      sh       <= '0;
      left     <= '0;
      tx_byte  <= '0;
      tx_first <= 1'b0;
    end else if (word_stb) begin
      tx_byte  <= word[31:24];
      tx_first <= 1'b1;
      sh       <= {word[23:0], 8'h00};
      left     <= 3'd3;
    end else if (left != 0) begin
      tx_byte  <= sh[31:24];
      tx_first <= 1'b0;
      sh       <= {sh[23:0], 8'h00};
      left     <= left - 1'b1;
    end else begin
      tx_byte  <= '0;
      tx_first <= 1'b0;
    end
  end

endmodule
