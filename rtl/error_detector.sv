// error_detector: BERT error detector (receive state machine).
//
// Three states, as in the paper's state diagram:
//   RESET        error counter cleared; wait for the start-of-frame word.
//   LOCK         lock is raised; every received word becomes the PRBS seed
//                (prbsCur <= dataIn) and the next received word is compared
//                with the PRBS successor of the previous one. After num_cycle
//                consecutive error-free words the pattern match is declared.
//   ERROR_COUNT  the expected word is generated from the internal state
//                (prbsCur <= prbsNxt), so received errors can no longer
//                corrupt the reference. Each word is compared; the error flag
//                follows the comparison and the error counter counts words
//                with errors. The state is left only by reset: pattern match
//                is not withdrawn for consecutive error cycles.
// Per compared word an err_event_t reports the number of one-to-zero and
// zero-to-one bit flips and the number of bytes whose 8B/10B code group was
// invalid ("word errors"). Bytes flagged invalid (or received as control
// characters) are left out of the bit-flip count because the decoder's data
// for them is meaningless. The split into flip directions and the handling of
// invalid bytes are this design's reading of the paper's error types.
//
// Timing: one compared word per cycle with in_valid; all outputs registered,
// ev one cycle after the word.
module error_detector
  import bert_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  pld_word_t   in_word,
  input  logic        prbs_sel23,
  input  logic [15:0] num_cycle,
  output err_event_t  ev,
  output logic        lock,
  output logic        pattern_match,
  output logic        error_flag,
  output logic [31:0] error_count,
  output rx_state_t   state
);
  localparam int unsigned W = PLD_W;

  logic [W-1:0] prbs_cur, prbs_nxt, diff, good_mask;
  logic [15:0]  match_cnt, match_nxt, target;
  logic [3:0]   bad_byte;
  logic [5:0]   n10, n01;
  logic [2:0]   nw;
  logic         sof_received;

  prbs_gen #(.W(W)) u_prbs (.sel23(prbs_sel23), .cur(prbs_cur), .nxt(prbs_nxt));

  always_comb begin
    sof_received = in_valid && in_word.d == SOF_WORD && in_word.err == 4'b0;
    target    = (num_cycle == 16'd0) ? 16'd1 : num_cycle;
    bad_byte  = in_word.err | in_word.k;
    for (int b = 0; b < 4; b++) good_mask[8*b +: 8] = {8{!bad_byte[b]}};
    diff      = (in_word.d ^ prbs_nxt) & good_mask;
    n10       = popcount32(diff & prbs_nxt);
    n01       = popcount32(diff & ~prbs_nxt);
    nw        = 3'(bad_byte[0]) + 3'(bad_byte[1]) + 3'(bad_byte[2]) + 3'(bad_byte[3]);
    match_nxt = (diff == '0 && bad_byte == 4'b0) ? match_cnt + 16'd1 : 16'd0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= RX_RESET;
      prbs_cur      <= '0;
      match_cnt     <= '0;
      lock          <= 1'b0;
      pattern_match <= 1'b0;
      error_flag    <= 1'b0;
      error_count   <= '0;
      ev            <= '0;
    end else begin
      ev <= '0;
      unique case (state)
        RX_RESET: begin
          error_count <= '0;
          match_cnt   <= '0;
          if (sof_received) state <= RX_LOCK;
        end
        RX_LOCK: begin
          lock <= 1'b1;
          if (in_valid) begin
            prbs_cur  <= in_word.d;
            match_cnt <= match_nxt;
            if (match_nxt == target) begin
              state         <= RX_ERROR_COUNT;
              pattern_match <= 1'b1;
            end
          end
        end
        RX_ERROR_COUNT: begin
          if (in_valid) begin
            prbs_cur   <= prbs_nxt;
            error_flag <= (n10 != 0) || (n01 != 0) || (nw != 0);
            if ((n10 != 0) || (n01 != 0) || (nw != 0)) error_count <= error_count + 32'd1;
            ev <= '{valid: 1'b1, n1to0: n10, n0to1: n01, nword: nw};
          end
        end
        default: state <= RX_RESET;
      endcase
    end
  end
endmodule
