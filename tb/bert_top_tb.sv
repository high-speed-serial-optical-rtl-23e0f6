// bert_top_tb: end-to-end test of the bit error rate tester at its default
// parameters, with the transmit output looped back to the receive input
// through a behavioural serial link model.
//
// For each configuration (8B/10B on/off, PRBS 2^7-1 / 2^23-1, several bit
// offsets) it resets the tester, brings up PLL lock and then frequency lock,
// and checks the start-up sequence: sync words, alignment, byte ordering,
// the switch to the PRBS pattern, self-seeded LOCK and pattern match. It then
// checks an error-free run (no errors, one 32-bit word compared per PLD
// clock), injected LSB errors (one flipped bit each), line bit flips (in
// non-coded mode exactly the one-to-zero and zero-to-one counts made by the
// link; in 8B/10B mode at least one errored word per flip and word errors
// reported), the error log records and time stamps, and finally a long burst
// of line errors that overflows the log FIFO without losing pattern match.
// Every mechanism is counted and one that never happened is a failure.
module bert_top_tb;
  timeunit 1ns;
  timeprecision 1ps;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic pld_clk = 0, tx_pcs_clk = 0, rx_pcs_clk = 0;
  logic rst_btn = 1, pll_locked = 0, rx_freqlock = 0, inject = 0, log_rd = 0;
  logic [19:0] tx_par, rx_par;
  bert_cfg_t cfg = '{coded: 1'b1, prbs23: 1'b0, num_cycle: 16'd32};
  bert_status_t st;
  err_rec_t rec;
  logic log_empty;
  err_counters_t cnt;
  int offset = 0;
  logic flip_req = 0, flip_from = 0;
  int n10, n01;

  // mechanism counters
  int m_sync, m_slip, m_noslip, m_lock, m_match, m_inject, m_f10, m_f01, m_word_err,
      m_bypass, m_coded, m_prbs23, m_prbs7, m_log_read, m_overflow, m_burst_held;

  bert_top dut (
    .pld_clk(pld_clk), .tx_pcs_clk(tx_pcs_clk), .rx_pcs_clk(rx_pcs_clk), .rst_btn(rst_btn),
    .pll_locked(pll_locked), .rx_freqlock(rx_freqlock), .tx_parallel(tx_par), .rx_parallel(rx_par),
    .cfg(cfg), .inject_err(inject), .status(st), .log_rd_en(log_rd), .log_rec(rec),
    .log_empty(log_empty), .counters(cnt));

  serial_link_model u_link (.clk(tx_pcs_clk), .coded(cfg.coded), .offset(offset), .tx_word(tx_par),
    .rx_word(rx_par), .flip_req(flip_req), .flip_from(flip_from), .n10(n10), .n01(n01));

  // 125 MHz PLD clock, 250 MHz transceiver clocks; recovered clock shifted
  always #4 pld_clk = !pld_clk;
  always #2 tx_pcs_clk = !tx_pcs_clk;
  always @(tx_pcs_clk) rx_pcs_clk <= #1.3 tx_pcs_clk;

  initial begin
    repeat (400000) @(posedge pld_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  task automatic pld(input int n);
    repeat (n) @(posedge pld_clk);
    #0.5;
  endtask

  // one line flip, then wait for it to pass through
  task automatic line_flip(input logic from);
    @(posedge tx_pcs_clk); #0.5;
    flip_req = 1; flip_from = from;
    @(posedge tx_pcs_clk); #0.5;
    flip_req = 0;
    pld(30);
  endtask

  // pop every record, check count and time order, return how many
  task automatic drain_log(output int n);
    logic [31:0] last;
    n = 0; last = 0;
    while (!log_empty) begin
      chk(rec.tstamp >= last && (rec.n1to0 != 0 || rec.n0to1 != 0 || rec.nword != 0), "record sane");
      last = rec.tstamp;
      log_rd = 1; pld(1); log_rd = 0;
      n++;
    end
    if (n > 0) m_log_read++;
  endtask

  task automatic run(input bit coded, input bit p23, input int off);
    int t, nrec;
    logic [47:0] w0, e0, b10, b01;
    $display("run coded=%0d prbs23=%0d offset=%0d", coded, p23, off);
    rst_btn = 1; pll_locked = 0; rx_freqlock = 0;
    cfg = '{coded: coded, prbs23: p23, num_cycle: 16'd32};
    offset = off;
    pld(10);
    rst_btn = 0;
    pld(20);
    pll_locked = 1;
    pld(40);
    chk(st.tx_state == TX_IDLE && !st.syncstatus, "idle, not synced before freqlock");
    rx_freqlock = 1;
    t = 0;
    while (!st.pattern_match && t < 2000) begin pld(1); t++; end
    chk(st.pattern_match && st.lock && st.syncstatus && st.byteorder_done &&
        st.tx_state == TX_EN_GEN_PATTERN && st.rx_state == RX_ERROR_COUNT, "link up, pattern match");
    if (st.syncstatus) m_sync++;
    if (st.lock) m_lock++;
    if (st.pattern_match) m_match++;
    if (dut.u_bord.slip) m_slip++; else m_noslip++;
    if (coded) m_coded++; else m_bypass++;
    if (p23) m_prbs23++; else m_prbs7++;
    // clean run at full rate
    pld(10);
    w0 = cnt.words;
    pld(1000);
    chk(cnt.words - w0 >= 999 && cnt.words - w0 <= 1001, $sformatf("one word per clock (%0d)", cnt.words - w0));
    chk(cnt.err_words == 0 && log_empty && !st.error_flag, "error free");
    // injected errors: one bit each
    e0 = cnt.err_words;
    for (int i = 0; i < 5; i++) begin
      inject = 1; pld(1); inject = 0; pld(40);
    end
    chk(cnt.err_words - e0 == 5 && cnt.bits1to0 + cnt.bits0to1 == 5 && cnt.word_errs == 0,
        "five injected single-bit errors");
    m_inject += 5;
    drain_log(nrec);
    chk(nrec == 5, $sformatf("five log records (%0d)", nrec));
    // line flips
    e0 = cnt.err_words; b10 = cnt.bits1to0; b01 = cnt.bits0to1;
    begin
      int f10, f01;
      f10 = n10; f01 = n01;
      for (int i = 0; i < 6; i++) line_flip(1'b1);
      for (int i = 0; i < 4; i++) line_flip(1'b0);
      f10 = n10 - f10; f01 = n01 - f01;
      if (!coded) begin
        chk(int'(cnt.bits1to0 - b10) == f10 && int'(cnt.bits0to1 - b01) == f01 && f10 == 6 && f01 == 4,
            $sformatf("flip directions %0d/%0d", cnt.bits1to0 - b10, cnt.bits0to1 - b01));
        chk(cnt.err_words - e0 == 10, "one errored word per flip");
        m_f10 += int'(cnt.bits1to0 - b10);
        m_f01 += int'(cnt.bits0to1 - b01);
      end else begin
        chk(cnt.err_words - e0 >= 10 && cnt.err_words - e0 <= 40, $sformatf("errored words %0d for 10 flips", cnt.err_words - e0));
        chk(cnt.word_errs > 0, "word errors reported");
        m_word_err += int'(cnt.word_errs);
      end
    end
    chk(st.pattern_match, "pattern match kept");
    drain_log(nrec);
    chk(48'(nrec) == cnt.err_words - 5, "log holds every errored word");
  endtask

  initial begin
    int nrec;
    logic [47:0] e_before;
    pld(5);
    run(1'b1, 1'b0, 7);
    run(1'b0, 1'b0, 3);
    run(1'b1, 1'b1, 13);
    run(1'b0, 1'b1, 11);
    run(1'b1, 1'b0, 0);
    run(1'b0, 1'b0, 15);
    // heavy attenuation: a 1->0 flip in every transceiver word for 700 words
    e_before = cnt.err_words;
    for (int i = 0; i < 1400; i++) begin
      @(posedge tx_pcs_clk); #0.5 flip_req = 1; flip_from = 1'b1;
    end
    @(posedge tx_pcs_clk); #0.5 flip_req = 0;
    pld(40);
    chk(st.log_overflow && cnt.dropped > 0 && cnt.err_words - e_before - 48'(cnt.dropped) == 48'd512,
        $sformatf("log overflow: %0d errored words, %0d dropped", cnt.err_words, cnt.dropped));
    if (st.log_overflow) m_overflow++;
    chk(st.pattern_match && st.rx_state == RX_ERROR_COUNT, "pattern match held through burst");
    if (st.pattern_match) m_burst_held++;
    drain_log(nrec);
    chk(nrec == 512, "full log read back");
    $display("mechanisms: sync=%0d slip=%0d noslip=%0d lock=%0d match=%0d inject=%0d 1to0=%0d 0to1=%0d word_err=%0d bypass=%0d coded=%0d prbs7=%0d prbs23=%0d log_read=%0d overflow=%0d burst_held=%0d",
      m_sync, m_slip, m_noslip, m_lock, m_match, m_inject, m_f10, m_f01, m_word_err, m_bypass, m_coded,
      m_prbs7, m_prbs23, m_log_read, m_overflow, m_burst_held);
    chk(m_sync > 0 && m_lock > 0 && m_match > 0 && m_inject > 0, "start-up and injection seen");
    chk(m_slip > 0 && m_noslip > 0, "byte ordering slip and no slip both seen");
    chk(m_f10 > 0 && m_f01 > 0 && m_word_err > 0, "flip directions and word errors seen");
    chk(m_bypass > 0 && m_coded > 0 && m_prbs7 > 0 && m_prbs23 > 0, "all modes seen");
    chk(m_log_read > 0 && m_overflow > 0 && m_burst_held > 0, "log read, overflow, held match seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
