// word_aligner: word boundary alignment and link synchronization.
//
// The deserializer delivers 20-bit words (8B/10B mode) or 16-bit words in
// din[15:0] (non-coded mode) whose boundaries are arbitrary with respect to
// the transmitted words. The aligner keeps the previous word, so it sees a
// window of two words, and searches every bit offset for the alignment
// pattern: the K28.5 comma (either disparity) in 8B/10B mode, or the 16-bit
// value SYNC_WORD[15:0] in non-coded mode. The same pattern is used for
// alignment, byte ordering and synchronization, as in the paper.
//
// Synchronization state machine (this design's choice; the paper only says
// that the aligner flags synchronization): a pattern found at a new offset
// becomes the candidate; SYNC_N patterns at the same candidate offset give
// syncstatus, after which the offset is frozen until reset, so data that
// happens to contain the pattern cannot move the boundary. A wrong lock can
// only be cleared by a reset, matching the paper's remark that several resets
// may be needed.
//
// Output: dout is the window slice at the chosen offset, so the pattern sits
// at bit 0; patterndetect marks a dout that begins with the pattern.
// Timing: one word per cycle, latency 1.
module word_aligner
  import bert_pkg::*;
#(
  parameter int unsigned SYNC_N = 3
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        coded,
  input  logic [19:0] din,
  output logic [19:0] dout,
  output logic        patterndetect,
  output logic        syncstatus
);
  logic [19:0] prev;
  logic [39:0] win;
  logic [5:0]  off, hit_off;
  logic        hit, at_off;
  logic [7:0]  cnt;

  // window of two words, oldest bits lowest; in 16-bit mode only [15:0] count
  always_comb begin
    win = coded ? {din, prev} : {8'b0, din[15:0], prev[15:0]};
    hit = 1'b0;
    hit_off = '0;
    for (int o = 19; o >= 0; o--) begin
      if (coded) begin
        if (win[o +: 10] == COMMA_NEG || win[o +: 10] == COMMA_POS) begin
          hit = 1'b1;
          hit_off = 6'(o);
        end
      end else if (o < 16) begin
        if (win[o +: 16] == SYNC_WORD[15:0]) begin
          hit = 1'b1;
          hit_off = 6'(o);
        end
      end
    end
    if (coded) at_off = (win[off +: 10] == COMMA_NEG) || (win[off +: 10] == COMMA_POS);
    else       at_off = (win[off +: 16] == SYNC_WORD[15:0]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev          <= '0;
      off           <= '0;
      cnt           <= '0;
      syncstatus    <= 1'b0;
      dout          <= '0;
      patterndetect <= 1'b0;
    end else begin
      prev          <= din;
      dout          <= coded ? win[off +: 20] : {4'b0, win[off +: 16]};
      patterndetect <= at_off;
      if (!syncstatus && hit) begin
        if (hit_off == off) begin
          cnt <= cnt + 8'd1;
          if (cnt + 8'd1 >= 8'(SYNC_N)) syncstatus <= 1'b1;
        end else begin
          off <= hit_off;
          cnt <= 8'd1;
        end
      end
    end
  end
endmodule
