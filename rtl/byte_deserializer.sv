// byte_deserializer: 16-bit transceiver words to 32-bit PLD words.
//
// Runs on the receive transceiver clock. Consecutive 16-bit words (with their
// K and error flags) are paired: the first of a pair becomes the low half,
// the second the high half, and out_valid pulses once every second cycle, so
// the PLD side can run at half rate. Which word starts a pair is arbitrary
// after reset; the byte ordering block that follows puts the halves right.
//
// Timing: out and out_valid registered, one 32-bit word every two cycles.
module byte_deserializer
  import bert_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  pcs_word_t in,
  output pld_word_t out,
  output logic      out_valid
);
  logic      phase;
  pcs_word_t lo;

  always_ff @(posedge clk) begin
    if (rst) begin
      phase     <= 1'b0;
      lo        <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      phase     <= !phase;
      out_valid <= phase;
      if (!phase) lo <= in;
      else        out <= '{err: {in.err, lo.err}, k: {in.k, lo.k}, d: {in.d, lo.d}};
    end
  end
endmodule
