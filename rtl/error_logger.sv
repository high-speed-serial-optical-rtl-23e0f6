// error_logger: error type counters and a time-stamped error record FIFO.
//
// Every word the error detector compares arrives as an err_event_t. The logger
// keeps running counters of compared words, words with errors, one-to-zero and
// zero-to-one bit flips and invalid code groups (word errors). For every word
// with an error it writes a record {time stamp, flip counts, word errors} into
// a FIFO that the host empties through rd_en; the statistics themselves are
// computed on the host, as in the paper. The time stamp is a free-running
// count of clock cycles. When the FIFO is full the record is dropped and the
// dropped counter and overflow flag say so. The paper lists what is logged
// (types, type counters, time stamps, in FIFOs); the record layout, depth and
// counter widths are this design's choices.
//
// Timing: counters and FIFO update in the cycle after ev; rec is show-ahead
// (valid while empty is low, rd_en pops it). clear zeroes counters and time.
module error_logger
  import bert_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          clear,
  input  err_event_t    ev,
  input  logic          rd_en,
  output err_rec_t      rec,
  output logic          empty,
  output logic          overflow,
  output err_counters_t cnt
);
  localparam int unsigned AW = $clog2(DEPTH);

  err_rec_t    mem [DEPTH];
  logic [AW:0] wptr, rptr;
  logic [31:0] tstamp;
  logic        is_err, full, push, pop;

  assign is_err = ev.valid && (ev.n1to0 != 0 || ev.n0to1 != 0 || ev.nword != 0);
  assign empty  = (wptr == rptr);
  assign full   = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign push   = is_err && !full;
  assign pop    = rd_en && !empty;
  assign rec    = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= '{tstamp: tstamp, n1to0: ev.n1to0, n0to1: ev.n0to1, nword: ev.nword};
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      wptr     <= '0;
      rptr     <= '0;
      tstamp   <= '0;
      overflow <= 1'b0;
      cnt      <= '0;
    end else begin
      tstamp <= tstamp + 32'd1;
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      if (ev.valid) begin
        cnt.words     <= cnt.words + 48'd1;
        cnt.bits1to0  <= cnt.bits1to0 + 48'(ev.n1to0);
        cnt.bits0to1  <= cnt.bits0to1 + 48'(ev.n0to1);
        cnt.word_errs <= cnt.word_errs + 48'(ev.nword);
      end
      if (is_err) cnt.err_words <= cnt.err_words + 48'd1;
      if (is_err && full) begin
        overflow    <= 1'b1;
        cnt.dropped <= cnt.dropped + 16'd1;
      end
    end
  end
endmodule
