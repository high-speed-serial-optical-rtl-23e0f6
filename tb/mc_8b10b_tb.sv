// mc_8b10b_tb: Monte-Carlo run of single line-bit flips through the cascaded
// 8B/10B encoder and decoder, the experiment behind the paper's error-spread
// table. Random bytes are encoded two per cycle; every SPACING cycles one
// randomly chosen line bit of the 20-bit word is inverted before decoding.
// For each flip the decoded code groups from the flipped one onward are
// classified: an invalid or wrong-disparity code group is a word error, a
// valid code group with the wrong byte is a bit-flip error, and each is
// binned by its distance (in code groups) from the flipped one.
// The counts are printed next to the paper's figures for 10,000 flips and
// checked against its findings: bit-flip errors stay in the flipped code
// group, more word errors than bit-flip errors, word errors in the flipped
// code group near the 64 % implied by the paper's table, and a spread that
// falls off with distance. The flips here are spaced SPACING words apart rather than at a
// fixed bit error rate; the paper reports the spread to be the same from
// 1e-4 down to 1e-10.
module mc_8b10b_tb;
  import bert_pkg::*;
  localparam int NFLIP   = 10000;
  localparam int SPACING = 8;       // words between flips (16 code groups)
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  pcs_word_t enc_in = '0, dec_out;
  logic [19:0] enc_out, line;
  logic [19:0] mask = '0;

  enc8b10b u_enc (.clk(clk), .rst(rst), .en(1'b1), .in(enc_in), .out(enc_out));
  dec8b10b u_dec (.clk(clk), .rst(rst), .en(1'b1), .in(line), .out(dec_out));
  assign line = enc_out ^ mask;

  always #5 clk = !clk;
  initial begin
    repeat (NFLIP * SPACING + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  int word_err[6], bit_err[6], bits_wrong, no_spread, later_seen;

  initial begin
    logic [15:0] sent[$];
    int flip_cg, cg, pos, total_w, total_b;
    for (int i = 0; i < 6; i++) begin word_err[i] = 0; bit_err[i] = 0; end
    flip_cg = -100;
    bits_wrong = 0; no_spread = 0; later_seen = 0;
    cg = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // enc_out of cycle n appears one cycle after enc_in; dec_out one more
    for (int n = 0; n < NFLIP * SPACING + 4; n++) begin
      enc_in = '{err: 2'b0, k: 2'b0, d: 16'($urandom)};
      sent.push_back(enc_in.d);
      // flip a bit of the word now on the line (input of cycle n-1)
      if (n % SPACING == 2 && n < NFLIP * SPACING) begin
        int b;
        b = int'($urandom % 20);
        mask = 20'(1) << b;
        flip_cg = 2 * (n - 1) + b / 10;
      end else begin
        mask = '0;
      end
      @(posedge clk); #1;
      // dec_out now holds the decode of the word of cycle n-1
      if (n >= 1) begin
        logic [15:0] e;
        e = sent.pop_front();
        for (int h = 0; h < 2; h++) begin
          cg = 2 * (n - 1) + h;
          pos = cg - flip_cg;
          if (pos == 0) later_seen = 0;
          if (pos >= 0 && pos < 2 * SPACING) begin
            if (pos > 0 && dec_out.err[h]) later_seen = 1;
            if (pos == 2 * SPACING - 1 && !later_seen) no_spread++;
            if (pos > 5) pos = 5;
            if (dec_out.err[h]) word_err[pos]++;
            else if (dec_out.d[8*h +: 8] != e[8*h +: 8] || dec_out.k[h]) begin
              bit_err[pos]++;
              bits_wrong += $countones(dec_out.d[8*h +: 8] ^ e[8*h +: 8]);
            end
          end
        end
      end
    end
    total_w = 0; total_b = 0;
    for (int i = 0; i < 6; i++) begin total_w += word_err[i]; total_b += bit_err[i]; end
    $display("flips %0d: wrong data bits %0d in %0d code groups (paper: 7239 bit-flip errors), word errors %0d (paper 13469)",
             NFLIP, bits_wrong, total_b, total_w);
    $display("word errors by position: same %0d (paper, by difference, 6409), 1st %0d (5135), 2nd %0d (1393), 3rd+ %0d (532)",
             word_err[0], word_err[1], word_err[2], word_err[3] + word_err[4] + word_err[5]);
    $display("flips with no error after their own code group: %0d", no_spread);
    $display("bit-flip errors by position: same %0d, later %0d",
             bit_err[0], bit_err[1] + bit_err[2] + bit_err[3] + bit_err[4] + bit_err[5]);
    chk(bit_err[1] + bit_err[2] + bit_err[3] + bit_err[4] + bit_err[5] == 0, "bit-flip errors only in the flipped code group");
    chk(total_w > total_b, "more word errors than bit-flip errors");
    chk(word_err[1] > word_err[2] && word_err[2] > word_err[3] + word_err[4] + word_err[5], "spread decreases with distance");
    chk(word_err[0] > NFLIP / 2 && word_err[0] < NFLIP * 3 / 4, "word errors in the flipped code group near the paper's 64 %");
    chk(total_b + word_err[0] >= NFLIP * 9 / 10, "nearly every flip shows in its own code group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
