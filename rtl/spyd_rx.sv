// spyd_rx -- frame checker of the interconnection matrix test.
//
// Receives the frames of spyd_tx (2048 words, 12-word header) on one link.
// While out of synchronisation it looks for four consecutive words whose 3
// least significant bits are 3'b111; the word after them is taken as frame
// word 4.  In synchronisation every word is compared with the word expected
// at its position: the address words are compared with the address seen in
// the previous frame (from the second frame on), all other words with their fixed value.  Any
// difference counts one word error (16-bit counter, saturating).  A wrong
// synchronisation word drops synchronisation and raises the sticky no_sync
// flag.  The emitter address (slot, fpga, port) is kept in addr.
//
// Interface: clk, rst_n, en (a word is present), word, clear (clears the
// counters); synced, no_sync, errors, addr.  Timing: registered.
// The two error kinds, the 16-bit count and keeping the emitter's address are
// the paper's; the synchronisation search is this design's choice.
module spyd_rx #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] word,
  input  logic         clear,
  output logic         synced,
  output logic         no_sync,
  output logic [15:0]  errors,
  output logic [23:0]  addr
);

  logic [10:0] pos;          // position of the incoming word when synced
  logic [1:0]  run;          // count of 3'b111 tags seen while searching
  logic [20:0] addr_new;     // address slices of the current frame
  logic         addr_seen;    // one complete address has been received
  logic [W-1:0] exp_w;
  logic         addr_ok;
  logic [5:0]   cnt;

  always_comb begin
    exp_w   = '0;
    addr_ok = 1'b1;
    if (pos < 11'd4) exp_w[2:0] = 3'b111;
    else if (pos < 11'd12) begin
      exp_w[2:0] = addr[3 * (int'(pos) - 4) +: 3];
      addr_ok    = addr_seen;                    // the first frame sets addr
    end
    cnt = 6'(pos - 11'd12);
    if (pos >= 11'd12)
      for (int i = 0; i < int'(W); i++) exp_w[i] = cnt[i % 6];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos      <= '0;
      run      <= '0;
      synced   <= 1'b0;
      no_sync  <= 1'b0;
      errors   <= '0;
      addr     <= '0;
      addr_new <= '0;
      addr_seen <= 1'b0;
    end else begin
      if (clear) begin
        errors  <= '0;
        no_sync <= 1'b0;
      end
      if (en) begin
        if (!synced) begin
          if (word[2:0] == 3'b111) begin
            run <= run + 1'b1;
            if (run == 2'd3) begin
              synced <= 1'b1;
              pos    <= 11'd4;
              run    <= '0;
            end
          end else run <= '0;
        end else begin
          pos <= pos + 1'b1;
          if (pos >= 11'd4 && pos < 11'd11)
            addr_new[3 * (int'(pos) - 4) +: 3] <= word[2:0];
          if (pos == 11'd11) begin
            addr      <= {word[2:0], addr_new};
            addr_seen <= 1'b1;
          end
          if (pos < 11'd4 && word != exp_w) begin
            synced  <= 1'b0;
            no_sync <= 1'b1;
            run     <= '0;
          end
          if (!clear && word != exp_w && addr_ok && errors != 16'hFFFF)
            errors <= errors + 1'b1;
        end
      end
    end
  end

endmodule
