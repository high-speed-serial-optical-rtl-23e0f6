// error_logger_tb: sends error events and checks the type counters, the
// record FIFO contents and order, the time stamps (cycle counts), the
// overflow flag and dropped counter when the FIFO is full, and clear.
module error_logger_tb;
  import bert_pkg::*;
  localparam int DEPTH = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, clr = 0, rd = 0;
  err_event_t ev = '0;
  err_rec_t rec;
  logic empty, ovf;
  err_counters_t cnt;
  int t0;
  int exp_ts[$];
  err_event_t exp_ev[$];

  error_logger #(.DEPTH(DEPTH)) dut (.clk(clk), .rst(rst), .clear(clr), .ev(ev), .rd_en(rd),
    .rec(rec), .empty(empty), .overflow(ovf), .cnt(cnt));

  always #5 clk = !clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  int cyc;
  always @(posedge clk) cyc <= rst ? 0 : cyc + 1;

  initial begin
    int n10, n01, nw, nerr, nwords;
    n10 = 0; n01 = 0; nw = 0; nerr = 0; nwords = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // 20 compared words, every third with an error: 7 error records
    for (int i = 0; i < 20; i++) begin
      ev = '{valid: 1'b1, n1to0: 6'((i % 3 == 0) ? i % 5 + 1 : 0), n0to1: 6'((i % 3 == 0) ? i % 2 : 0),
             nword: 3'((i % 6 == 0) ? 1 : 0)};
      nwords++;
      n10 += ev.n1to0; n01 += ev.n0to1; nw += ev.nword;
      if (ev.n1to0 != 0 || ev.n0to1 != 0 || ev.nword != 0) begin
        nerr++;
        exp_ts.push_back(cyc);
        exp_ev.push_back(ev);
      end
      @(posedge clk); #1;
    end
    ev = '0;
    @(posedge clk); #1;
    chk(cnt.words == 48'(nwords) && cnt.err_words == 48'(nerr), "word counters");
    chk(cnt.bits1to0 == 48'(n10) && cnt.bits0to1 == 48'(n01) && cnt.word_errs == 48'(nw), "type counters");
    chk(!ovf && !empty, "no overflow yet");
    for (int i = 0; i < nerr; i++) begin
      chk(!empty, "record present");
      chk(rec.tstamp == 32'(exp_ts[i]) && rec.n1to0 == exp_ev[i].n1to0 &&
          rec.n0to1 == exp_ev[i].n0to1 && rec.nword == exp_ev[i].nword, $sformatf("record %0d", i));
      rd = 1; @(posedge clk); #1 rd = 0;
    end
    chk(empty, "fifo drained");
    // overflow: DEPTH + 3 errors without reading
    for (int i = 0; i < DEPTH + 3; i++) begin
      ev = '{valid: 1'b1, n1to0: 6'd1, n0to1: 6'd0, nword: 3'd0};
      @(posedge clk); #1;
    end
    ev = '0;
    @(posedge clk); #1;
    chk(ovf && cnt.dropped == 16'd3, "overflow and dropped");
    chk(cnt.err_words == 48'(nerr + DEPTH + 3), "errors counted while dropped");
    clr = 1; @(posedge clk); #1 clr = 0;
    chk(empty && !ovf && cnt.words == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
