// byte_ordering: puts the least significant half of each 32-bit word first.
//
// After byte deserialization the word carrying the alignment pattern may sit
// in the upper half. The first time the pattern is seen after reset (K28.5
// with its K flag in byte 0 or byte 2 in 8B/10B mode; SYNC_WORD[15:0] in the
// low or high half in non-coded mode) the block decides: pattern low - pass
// words through; pattern high - from then on output {current low half,
// previous high half}, i.e. slip the stream by 16 bits; the word holding the
// pattern in its high half is then completed by the next input, so the first
// output comes one word later. The decision is then frozen (done = 1). The paper gives the purpose and that the same pattern is
// used; the slip-once scheme is this design's choice.
//
// Timing: one word per in_valid, registered, latency 1 word.
module byte_ordering
  import bert_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      coded,
  input  logic      in_valid,
  input  pld_word_t in,
  output logic      out_valid,
  output pld_word_t out,
  output logic      done
);
  logic      slip, pat_lo, pat_hi;
  pld_word_t prev, swapped;

  always_comb begin
    if (coded) begin
      pat_lo = in.k[0] && !in.err[0] && in.d[7:0]   == K28_5;
      pat_hi = in.k[2] && !in.err[2] && in.d[23:16] == K28_5;
    end else begin
      pat_lo = in.d[15:0]  == SYNC_WORD[15:0];
      pat_hi = in.d[31:16] == SYNC_WORD[15:0];
    end
    swapped = '{err: {in.err[1:0], prev.err[3:2]},
                k:   {in.k[1:0],   prev.k[3:2]},
                d:   {in.d[15:0],  prev.d[31:16]}};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      slip      <= 1'b0;
      done      <= 1'b0;
      prev      <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (done || pat_lo);
      if (in_valid) begin
        prev <= in;
        if (!done && (pat_lo || pat_hi)) begin
          done <= 1'b1;
          slip <= !pat_lo;
          out  <= in;                      // passed on only if the pattern is low
        end else begin
          out  <= slip ? swapped : in;
        end
      end
    end
  end
endmodule
