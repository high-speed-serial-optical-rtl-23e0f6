// byte_serializer: 32-bit PLD words to 16-bit transceiver words.
//
// Runs on the transmit transceiver clock, which is twice the PLD clock, so the
// PLD side can run at half rate. Every second cycle it pops one 32-bit word
// (with its four K flags) from the TX FIFO and sends the low half; in the next
// cycle it sends the high half. Byte 0 is therefore first on the line.
// Reading starts only once the FIFO holds PRIME words, so that the FIFO
// absorbs the phase difference of the two clocks; until then, or if the FIFO
// ever runs empty, idle_word is sent instead. The half-rate scheme is the
// paper's; the priming threshold and idle fill are this design's choices.
//
// Timing: registered output; fifo_ren is combinational in the low-half cycle.
module byte_serializer
  import bert_pkg::*;
#(
  parameter int unsigned CW    = 4,   // width of fifo_count
  parameter int unsigned PRIME = 2
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          fifo_empty,
  input  logic [CW-1:0] fifo_count,
  input  pld_word_t     fifo_word,
  input  pld_word_t     idle_word,
  output logic          fifo_ren,
  output pcs_word_t     out
);
  logic      phase, primed;
  pld_word_t cur, hold;

  always_comb begin
    fifo_ren = !phase && primed && !fifo_empty;
    cur      = fifo_ren ? fifo_word : idle_word;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      phase  <= 1'b0;
      primed <= 1'b0;
      hold   <= '0;
      out    <= '0;
    end else begin
      if (fifo_count >= CW'(PRIME)) primed <= 1'b1;
      phase <= !phase;
      if (!phase) begin
        hold <= cur;
        out  <= '{err: cur.err[1:0], k: cur.k[1:0], d: cur.d[15:0]};
      end else begin
        out  <= '{err: hold.err[3:2], k: hold.k[3:2], d: hold.d[31:16]};
      end
    end
  end
endmodule
