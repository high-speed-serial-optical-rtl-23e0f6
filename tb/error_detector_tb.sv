// error_detector_tb: drives the receive state machine with a PRBS stream
// generated here and checks: RESET until SOF, LOCK with self-seeding, pattern
// match exactly num_cycle clean words after the first seeded word, counting of
// one-to-zero and zero-to-one flips, word errors for bytes flagged invalid
// (excluded from flip counting), pattern match held through a burst of
// consecutive errors, internal seeding (an errored word does not disturb the
// next one), skipped invalid cycles, and reset.
module error_detector_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, iv = 0, sel23 = 0;
  logic [15:0] ncyc = 16'd10;
  pld_word_t iw = '0;
  err_event_t ev;
  logic lock, pm, ef;
  logic [31:0] ec;
  rx_state_t st;
  logic [31:0] prev;

  error_detector dut (.clk(clk), .rst(rst), .in_valid(iv), .in_word(iw), .prbs_sel23(sel23),
    .num_cycle(ncyc), .ev(ev), .lock(lock), .pattern_match(pm), .error_flag(ef),
    .error_count(ec), .state(st));

  always #5 clk = !clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] nextw(input logic [31:0] p, input bit l23);
    bit [63:0] s;
    s = {32'b0, p};
    for (int i = 32; i < 64; i++) s[i] = l23 ? (s[i-18] ^ s[i-23]) : (s[i-6] ^ s[i-7]);
    return s[63:32];
  endfunction

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  // send one word: the next PRBS word xor flips, with byte error flags
  task automatic send(input logic [31:0] flips, input logic [3:0] err);
    prev = nextw(prev, sel23);
    iv = 1; iw = '{err: err, k: 4'b0, d: prev ^ flips};
    @(posedge clk); #1;
    iv = 0;
  endtask

  task automatic run(input bit l23);
    int t;
    logic [31:0] w;
    rst = 1; sel23 = l23; iv = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // sync words are ignored in RESET
    iv = 1; iw = '{err: 4'b0, k: SYNC_K, d: SYNC_WORD};
    repeat (5) @(posedge clk);
    #1 chk(st == RX_RESET && !lock, "stay in RESET");
    iw = '{err: 4'b0, k: SOF_K, d: SOF_WORD};
    @(posedge clk); #1 iv = 0;
    chk(st == RX_LOCK, "SOF -> LOCK");
    prev = 32'hDEAD_BEEF ^ {l23, 31'h0};
    // first seeded word cannot match (previous word was SOF), then num_cycle clean words
    iv = 1; iw = '{err: 4'b0, k: 4'b0, d: prev}; @(posedge clk); #1 iv = 0;
    send(32'h0000_0100, 4'b0);       // error in LOCK resets the match count
    t = 0;
    while (st != RX_ERROR_COUNT && t < 100) begin
      send(32'h0, 4'b0);
      t++;
      if (t == 3) begin iv = 0; repeat (2) @(posedge clk); #1; end   // gaps are skipped
    end
    chk(t == int'(ncyc), $sformatf("pattern match after %0d words", t));
    chk(lock && pm, "lock and pattern_match");
    chk(ec == 0, "error count cleared");
    send(32'h0, 4'b0);
    @(posedge clk); #1;
    // single flip: find a bit that is 1 in the expected word
    w = nextw(prev, sel23);
    for (int i = 0; i < 32; i++) if (w[i]) begin
      send(32'h1 << i, 4'b0); break;
    end
    chk(ev.valid && ev.n1to0 == 1 && ev.n0to1 == 0 && ev.nword == 0 && ef, "1->0 flip");
    w = nextw(prev, sel23);
    for (int i = 0; i < 32; i++) if (!w[i]) begin
      send(32'h1 << i, 4'b0); break;
    end
    chk(ev.n1to0 == 0 && ev.n0to1 == 1 && ef, "0->1 flip");
    // next word clean despite errored predecessor (internal seed)
    send(32'h0, 4'b0);
    chk(ev.valid && ev.n1to0 == 0 && ev.n0to1 == 0 && !ef, "internal seed");
    // two invalid bytes with garbage data: only word errors
    send(32'h00FF_00FF, 4'b0101);
    chk(ev.nword == 2 && ev.n1to0 == 0 && ev.n0to1 == 0, "word errors");
    // all 32 bits wrong: 1->0 plus 0->1 = 32
    w = nextw(prev, sel23);
    send(32'hFFFF_FFFF, 4'b0);
    chk(int'(ev.n1to0) == $countones(w) && int'(ev.n1to0) + int'(ev.n0to1) == 32, "all bits");
    // burst of consecutive error cycles does not drop pattern match
    repeat (50) send(32'h8000_0001, 4'b0);
    chk(pm && st == RX_ERROR_COUNT && ef, "match held through burst");
    chk(ec == 32'd54, $sformatf("error_count %0d", ec));
    send(32'h0, 4'b0);
    chk(!ef, "flag clears");
  endtask

  initial begin
    run(1'b0);
    run(1'b1);
    rst = 1; @(posedge clk); #1 chk(st == RX_RESET && !lock && !pm, "reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
