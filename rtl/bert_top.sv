// bert_top: FPGA-based bit error rate tester for a serial (optical) link.
//
// Transmit path (PLD clock, then transmit transceiver clock):
//   pattern_gen -> TX phase_fifo -> byte_serializer -> enc8b10b (or bypass)
//   -> tx_parallel, the 20-bit (16-bit non-coded) word for the serializer.
// Receive path (recovered transceiver clock, then PLD clock):
//   rx_parallel -> word_aligner -> dec8b10b (or bypass) -> byte_deserializer
//   -> byte_ordering -> RX phase_fifo -> error_detector -> error_logger.
// reset_ctrl sequences the resets from the PLL and CDR lock flags and a user
// button. The serializer, deserializer, transmit PLL (CMU), receive PLL and
// clock recovery unit are analog parts of the transceiver and stay outside:
// their parallel words, clocks and lock flags are ports. Host access (the
// paper's USB link to a PC) is reduced to plain configuration, status and
// log-read ports.
//
// Clocks: tx_pcs_clk and rx_pcs_clk run at the transceiver parallel rate
// (250 MHz for 5 Gb/s with 20-bit words), pld_clk at half that rate. pld_clk
// and tx_pcs_clk must come from the same source; rx_pcs_clk is the recovered
// clock of the same frequency and any phase. The phase FIFOs carry data across.
// Configuration bits are meant to be changed only while rst_btn is held.
//
// Start-up follows the paper: sync words until the receiver reports frequency
// lock and alignment, then start-of-frame and PRBS; the detector seeds itself
// from the data until num_cycle error-free words, then counts errors.
module bert_top
  import bert_pkg::*;
#(
  parameter int unsigned LOG_DEPTH  = 512,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned RST_HOLD   = 16,
  parameter int unsigned SYNC_N     = 3
) (
  input  logic          pld_clk,
  input  logic          tx_pcs_clk,
  input  logic          rx_pcs_clk,
  input  logic          rst_btn,
  input  logic          pll_locked,
  input  logic          rx_freqlock,
  output logic [19:0]   tx_parallel,
  input  logic [19:0]   rx_parallel,
  input  bert_cfg_t     cfg,
  input  logic          inject_err,
  output bert_status_t  status,
  input  logic          log_rd_en,
  output err_rec_t      log_rec,
  output logic          log_empty,
  output err_counters_t counters
);
  localparam int unsigned FW = $bits(pld_word_t);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  // ------------------------------------------------------------ resets
  logic tx_rst, rx_rst, tx_pcs_rst, rx_pcs_rst;
  logic coded_tx, coded_rx, freqlock_pld, syncstatus_pld, syncstatus;

  reset_ctrl #(.HOLD(RST_HOLD)) u_rst (
    .clk(pld_clk), .rst_btn(rst_btn), .pll_locked(pll_locked), .rx_freqlock(rx_freqlock),
    .tx_rst(tx_rst), .rx_rst(rx_rst));

  sync_2ff #(.N(2)) u_sync_tx  (.clk(tx_pcs_clk), .d({tx_rst, cfg.coded}), .q({tx_pcs_rst, coded_tx}));
  sync_2ff #(.N(2)) u_sync_rx  (.clk(rx_pcs_clk), .d({rx_rst, cfg.coded}), .q({rx_pcs_rst, coded_rx}));
  sync_2ff #(.N(2)) u_sync_pld (.clk(pld_clk), .d({rx_freqlock, syncstatus}),
                                .q({freqlock_pld, syncstatus_pld}));

  // ------------------------------------------------------------ transmit
  pld_word_t tx_word, txf_word;
  logic      tx_valid, txf_full, txf_empty, txf_ren;
  logic [CW-1:0] txf_count;
  pcs_word_t tx_half;

  pattern_gen u_gen (
    .clk(pld_clk), .rst(tx_rst), .rx_freqlock(freqlock_pld), .rx_patterndetect(syncstatus_pld),
    .prbs_sel23(cfg.prbs23), .inject_err(inject_err), .tx_ready(!txf_full),
    .tx_word(tx_word), .tx_valid(tx_valid), .state(status.tx_state));

  phase_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_txfifo (
    .wclk(pld_clk), .wrst(tx_rst), .wen(tx_valid), .wdata(tx_word), .full(txf_full),
    .rclk(tx_pcs_clk), .rrst(tx_pcs_rst), .ren(txf_ren), .rdata(txf_word), .empty(txf_empty),
    .rcount(txf_count));

  byte_serializer #(.CW(CW)) u_bser (
    .clk(tx_pcs_clk), .rst(tx_pcs_rst), .fifo_empty(txf_empty), .fifo_count(txf_count),
    .fifo_word(txf_word), .idle_word('{err: 4'b0, k: SYNC_K, d: SYNC_WORD}),
    .fifo_ren(txf_ren), .out(tx_half));

  enc8b10b u_enc (.clk(tx_pcs_clk), .rst(tx_pcs_rst), .en(coded_tx), .in(tx_half), .out(tx_parallel));

  // ------------------------------------------------------------ receive
  logic [19:0] aligned;
  logic        patdet;
  pcs_word_t   rx_half;
  pld_word_t   rx_pair, rx_ord, rxf_word;
  logic        pair_valid, ord_valid, rxf_empty;
  logic [CW-1:0] rxf_count;
  err_event_t  ev;

  word_aligner #(.SYNC_N(SYNC_N)) u_align (
    .clk(rx_pcs_clk), .rst(rx_pcs_rst), .coded(coded_rx), .din(rx_parallel),
    .dout(aligned), .patterndetect(patdet), .syncstatus(syncstatus));

  dec8b10b u_dec (.clk(rx_pcs_clk), .rst(rx_pcs_rst), .en(coded_rx), .in(aligned), .out(rx_half));

  byte_deserializer u_bdes (.clk(rx_pcs_clk), .rst(rx_pcs_rst), .in(rx_half),
                            .out(rx_pair), .out_valid(pair_valid));

  byte_ordering u_bord (.clk(rx_pcs_clk), .rst(rx_pcs_rst), .coded(coded_rx),
    .in_valid(pair_valid), .in(rx_pair), .out_valid(ord_valid), .out(rx_ord),
    .done(status.byteorder_done));

  phase_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_rxfifo (
    .wclk(rx_pcs_clk), .wrst(rx_pcs_rst), .wen(ord_valid), .wdata(rx_ord), .full(),
    .rclk(pld_clk), .rrst(rx_rst), .ren(!rxf_empty), .rdata(rxf_word), .empty(rxf_empty),
    .rcount(rxf_count));

  error_detector u_det (
    .clk(pld_clk), .rst(rx_rst), .in_valid(!rxf_empty), .in_word(rxf_word),
    .prbs_sel23(cfg.prbs23), .num_cycle(cfg.num_cycle), .ev(ev), .lock(status.lock),
    .pattern_match(status.pattern_match), .error_flag(status.error_flag), .error_count(),
    .state(status.rx_state));

  error_logger #(.DEPTH(LOG_DEPTH)) u_log (
    .clk(pld_clk), .rst(rx_rst), .clear(1'b0), .ev(ev), .rd_en(log_rd_en), .rec(log_rec),
    .empty(log_empty), .overflow(status.log_overflow), .cnt(counters));

  assign status.syncstatus = syncstatus;
endmodule
