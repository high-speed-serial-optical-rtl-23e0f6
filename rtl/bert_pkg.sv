// bert_pkg: types, constants and the 8B/10B code function shared by the
// serial-link bit error rate tester.
//
// Word formats. The programmable-logic (PLD) side moves 32-bit words, four
// bytes with one control (K) flag and one code-error flag per byte. The
// transceiver (PCS) side moves half of that, 16 bits per cycle at twice the
// PLD clock rate. Byte 0 (bits [7:0]) is the first byte on the line and bit 0
// of every word is the first bit sent.
//
// Synchronization and start-of-frame words. The same pattern serves word
// alignment, byte ordering and link synchronization: in 8B/10B mode it is the
// K28.5 comma in byte 0, in non-coded mode the 16-bit value SYNC_WORD[15:0].
// The start-of-frame word carries K27.7 in byte 0. Both values are this
// design's choice; the upper bytes were picked so that the non-coded pattern
// occurs at no other bit offset of the repeated sync word.
//
// enc8b10b_f() gives the IEEE 802.3 clause 36 code group of one byte for a
// given running disparity. Code groups are returned with bit a in bit 0 and
// bit j in bit 9, so bit 0 is sent first. The decoder reuses this function.
package bert_pkg;

  localparam int unsigned PLD_W = 32;   // PLD data path, bits
  localparam int unsigned PCS_W = 16;   // transceiver data path before coding
  localparam int unsigned SER_W = 20;   // serializer word (10 bits per byte coded)

  localparam logic [31:0] SYNC_WORD = 32'h4A4A_F6BC;  // byte 0 = K28.5 in coded mode
  localparam logic [3:0]  SYNC_K    = 4'b0001;
  localparam logic [31:0] SOF_WORD  = 32'h4A4A_F6FB;  // byte 0 = K27.7 in coded mode
  localparam logic [3:0]  SOF_K     = 4'b0001;
  localparam logic [7:0]  K28_5     = 8'hBC;
  localparam logic [9:0]  COMMA_NEG = 10'h17C;        // K28.5, RD- (a..j = 0011111010)
  localparam logic [9:0]  COMMA_POS = 10'h283;        // K28.5, RD+

  // 32-bit PLD word: data, K flags, code-error flags (one per byte)
  typedef struct packed {
    logic [3:0]  err;
    logic [3:0]  k;
    logic [31:0] d;
  } pld_word_t;

  // 16-bit transceiver word
  typedef struct packed {
    logic [1:0]  err;
    logic [1:0]  k;
    logic [15:0] d;
  } pcs_word_t;

  typedef enum logic {TX_IDLE, TX_EN_GEN_PATTERN} tx_state_t;
  typedef enum logic [1:0] {RX_RESET, RX_LOCK, RX_ERROR_COUNT} rx_state_t;

  // One compared word, as reported by the error detector
  typedef struct packed {
    logic       valid;     // a word was compared in ERROR_COUNT
    logic [5:0] n1to0;     // expected 1, received 0
    logic [5:0] n0to1;     // expected 0, received 1
    logic [2:0] nword;     // bytes with an invalid code group
  } err_event_t;

  // One logged error record
  typedef struct packed {
    logic [31:0] tstamp;
    logic [5:0]  n1to0;
    logic [5:0]  n0to1;
    logic [2:0]  nword;
  } err_rec_t;

  typedef struct packed {
    logic [47:0] words;       // words compared in ERROR_COUNT
    logic [47:0] err_words;   // words with any error
    logic [47:0] bits1to0;
    logic [47:0] bits0to1;
    logic [47:0] word_errs;   // invalid code groups
    logic [15:0] dropped;     // records lost to a full log FIFO
  } err_counters_t;

  // Host configuration and status
  typedef struct packed {
    logic        coded;       // 1: 8B/10B enabled, 0: bypassed
    logic        prbs23;      // 1: PRBS 2^23-1, 0: PRBS 2^7-1
    logic [15:0] num_cycle;   // consecutive good words for pattern match
  } bert_cfg_t;

  typedef struct packed {
    tx_state_t   tx_state;
    rx_state_t   rx_state;
    logic        syncstatus;
    logic        byteorder_done;
    logic        lock;
    logic        pattern_match;
    logic        error_flag;
    logic        log_overflow;
  } bert_status_t;

  // ---------------------------------------------------------------- 8B/10B
  // 5b/6b table, running disparity negative, written abcdei (a = MSB here)
  function automatic logic [5:0] tab6(input logic [4:0] x);
    unique case (x)
      5'd0:  tab6 = 6'b100111;  5'd1:  tab6 = 6'b011101;
      5'd2:  tab6 = 6'b101101;  5'd3:  tab6 = 6'b110001;
      5'd4:  tab6 = 6'b110101;  5'd5:  tab6 = 6'b101001;
      5'd6:  tab6 = 6'b011001;  5'd7:  tab6 = 6'b111000;
      5'd8:  tab6 = 6'b111001;  5'd9:  tab6 = 6'b100101;
      5'd10: tab6 = 6'b010101;  5'd11: tab6 = 6'b110100;
      5'd12: tab6 = 6'b001101;  5'd13: tab6 = 6'b101100;
      5'd14: tab6 = 6'b011100;  5'd15: tab6 = 6'b010111;
      5'd16: tab6 = 6'b011011;  5'd17: tab6 = 6'b100011;
      5'd18: tab6 = 6'b010011;  5'd19: tab6 = 6'b110010;
      5'd20: tab6 = 6'b001011;  5'd21: tab6 = 6'b101010;
      5'd22: tab6 = 6'b011010;  5'd23: tab6 = 6'b111010;
      5'd24: tab6 = 6'b110011;  5'd25: tab6 = 6'b100110;
      5'd26: tab6 = 6'b010110;  5'd27: tab6 = 6'b110110;
      5'd28: tab6 = 6'b001110;  5'd29: tab6 = 6'b101110;
      5'd30: tab6 = 6'b011110;  default: tab6 = 6'b101011;
    endcase
  endfunction

  // 3b/4b table, running disparity negative, written fghj (f = MSB here)
  function automatic logic [3:0] tab4(input logic [2:0] y, input logic k, input logic alt7);
    unique case (y)
      3'd0: tab4 = 4'b1011;
      3'd1: tab4 = k ? 4'b0110 : 4'b1001;
      3'd2: tab4 = k ? 4'b1010 : 4'b0101;
      3'd3: tab4 = 4'b1100;
      3'd4: tab4 = 4'b1101;
      3'd5: tab4 = k ? 4'b0101 : 4'b1010;
      3'd6: tab4 = k ? 4'b1001 : 4'b0110;
      default: tab4 = (k || alt7) ? 4'b0111 : 4'b1110;
    endcase
  endfunction

  function automatic logic [2:0] ones6(input logic [5:0] v);
    ones6 = 3'(v[0]) + 3'(v[1]) + 3'(v[2]) + 3'(v[3]) + 3'(v[4]) + 3'(v[5]);
  endfunction

  // Returns {rd_out, code[9:0]}; rd = 1 means positive running disparity.
  // code[0] = a ... code[5] = i, code[6] = f ... code[9] = j.
  function automatic logic [10:0] enc8b10b_f(input logic [7:0] d, input logic k, input logic rd);
    logic [4:0] x;
    logic [2:0] y;
    logic [5:0] c6;
    logic [3:0] c4;
    logic       rd6, alt7, flip6, flip4, rdo;
    logic [9:0] code;
    x = d[4:0];
    y = d[7:5];
    c6 = (k && x == 5'd28) ? 6'b001111 : tab6(x);
    // the RD+ form is the complement when the RD- form is unbalanced, and for D.07
    flip6 = rd && ((ones6(c6) != 3'd3) || (x == 5'd7 && !(k && x == 5'd28)));
    if (flip6) c6 = ~c6;
    rd6 = (ones6(c6) == 3'd3) ? rd : (ones6(c6) > 3'd3);
    alt7 = (!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
           ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    c4 = tab4(y, k, alt7);
    // 4b: complement under RD+ for unbalanced forms, D.x.3, and every K form
    flip4 = rd6 && ((ones6({2'b00, c4}) != 3'd2) || y == 3'd3 || k);
    if (flip4) c4 = ~c4;
    rdo = (ones6({2'b00, c4}) == 3'd2) ? rd6 : (ones6({2'b00, c4}) > 3'd2);
    // reverse into transmission order: a..i in [5:0], f..j in [9:6]
    for (int i = 0; i < 6; i++) code[i] = c6[5-i];
    for (int i = 0; i < 4; i++) code[6+i] = c4[3-i];
    enc8b10b_f = {rdo, code};
  endfunction

  // Popcount of a 32-bit vector, 6-bit result
  function automatic logic [5:0] popcount32(input logic [31:0] v);
    logic [5:0] s;
    s = '0;
    for (int i = 0; i < 32; i++) s = s + 6'(v[i]);
    popcount32 = s;
  endfunction

endpackage
