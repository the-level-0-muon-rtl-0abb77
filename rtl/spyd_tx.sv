// spyd_tx -- frame emitter of the interconnection matrix test.
//
// To validate every link between FPGAs, each emitter sends the same
// 2048-word frame over and over, one word per clock.  The first 12 words
// form the header; each header word carries a 3-bit tag in its three least
// significant bits, so that the header can be decoded on any bus of 3 to 54
// bits:
//   words 0-3   synchronisation: tag 3'b111;
//   words 4-11  emitter address: tag = successive 3-bit slices (least
//               significant first) of the 24-bit {slot, fpga, port}.
// Other bits of header words are 0.  Data words 12..2047 repeat a 6-bit
// counter, (word number - 12) mod 64, as many times as the width needs.
// The counter never shows 3'b111 on four consecutive words, so the
// synchronisation pattern cannot be seen inside the data.
//
// Interface: clk, rst_n, en (one word per clock when high), slot, fpga,
// port; word, frame_start.  Timing: registered output, frame word 0 is sent
// the clock after reset is released.
// Frame length, header size and use, tag position and 6-bit counters are the
// paper's; the tag values and the order of the address slices are this
// design's choice.
module spyd_tx #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [7:0]   slot,
  input  logic [7:0]   fpga,
  input  logic [7:0]   port,
  output logic [W-1:0] word,
  output logic         frame_start
);

  logic [10:0] pos;

  function automatic logic [W-1:0] frame_word(input logic [10:0] p,
                                               input logic [23:0] a);
    logic [W-1:0] v;
    logic [5:0]   cnt;
    v = '0;
    if (p < 11'd4) v[2:0] = 3'b111;
    else if (p < 11'd12) v[2:0] = a[3 * (int'(p) - 4) +: 3];
    else begin
      cnt = 6'(p - 11'd12);
      for (int i = 0; i < int'(W); i++) v[i] = cnt[i % 6];
    end
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos         <= '0;
      word        <= '0;
      frame_start <= 1'b0;
    end else if (en) begin
      word        <= frame_word(pos, {slot, fpga, port});
      frame_start <= pos == '0;
      pos         <= pos + 1'b1;
    end
  end

endmodule
