// pattern_gen: BERT pattern generator (transmit state machine).
//
// Two states, as in the paper's state diagram. In IDLE the synchronization
// word is sent every cycle so that the far-end receiver can lock and align.
// When the receiver reports frequency lock and a detected alignment pattern
// (rx_freqlock & rx_patterndetect) the machine moves to EN_GEN_PATTERN: it
// sends one start-of-frame word and then one PRBS word per cycle. Reset
// returns it to IDLE. A one-cycle pulse on inject_err flips bit 0 (the least
// significant bit) of the next PRBS word sent, emulating a single bit error;
// the generator state itself is not disturbed, so only that one bit is wrong.
//
// The state names, the transition condition and the state actions follow the
// paper. Sending SOF once before the PRBS stream, the SOF value and the PRBS
// seed are this design's choices.
//
// Timing: registered outputs. tx_valid is high whenever tx_ready is high
// (the TX FIFO is not full); the sequence only advances on accepted words.
module pattern_gen
  import bert_pkg::*;
#(
  parameter logic [31:0] SEED = 32'hFFFF_FFFF
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      rx_freqlock,
  input  logic      rx_patterndetect,
  input  logic      prbs_sel23,
  input  logic      inject_err,
  input  logic      tx_ready,
  output pld_word_t tx_word,
  output logic      tx_valid,
  output tx_state_t state
);
  localparam int unsigned W = PLD_W;

  logic [W-1:0] prbs_cur, prbs_nxt;
  logic         sof_sent, inject_pend;

  prbs_gen #(.W(W)) u_prbs (.sel23(prbs_sel23), .cur(prbs_cur), .nxt(prbs_nxt));

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= TX_IDLE;
      prbs_cur    <= SEED;
      sof_sent    <= 1'b0;
      inject_pend <= 1'b0;
      tx_valid    <= 1'b0;
      tx_word     <= '0;
    end else begin
      if (inject_err) inject_pend <= 1'b1;
      tx_valid <= tx_ready;
      if (tx_ready) begin
        unique case (state)
          TX_IDLE: begin
            tx_word <= '{err: 4'b0, k: SYNC_K, d: SYNC_WORD};
            if (rx_freqlock && rx_patterndetect) state <= TX_EN_GEN_PATTERN;
          end
          TX_EN_GEN_PATTERN: begin
            if (!sof_sent) begin
              tx_word  <= '{err: 4'b0, k: SOF_K, d: SOF_WORD};
              sof_sent <= 1'b1;
            end else begin
              tx_word  <= '{err: 4'b0, k: 4'b0, d: prbs_nxt ^ W'(inject_pend || inject_err)};
              prbs_cur <= prbs_nxt;
              inject_pend <= 1'b0;
            end
          end
          default: state <= TX_IDLE;
        endcase
      end
    end
  end
endmodule
