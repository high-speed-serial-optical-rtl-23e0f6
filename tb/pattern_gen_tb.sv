// pattern_gen_tb: checks the transmit state machine: sync words in IDLE, the
// transition on rx_freqlock & rx_patterndetect (neither alone suffices), one
// SOF word, then PRBS words that follow the polynomial recurrence, LSB error
// injection on exactly one word, stalls while tx_ready is low, and reset.
module pattern_gen_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, fl = 0, pd = 0, sel23 = 0, inj = 0, rdy = 1;
  pld_word_t w;
  logic v;
  tx_state_t st;

  pattern_gen dut (.clk(clk), .rst(rst), .rx_freqlock(fl), .rx_patterndetect(pd),
                   .prbs_sel23(sel23), .inject_err(inj), .tx_ready(rdy), .tx_word(w),
                   .tx_valid(v), .state(st));

  always #5 clk = !clk;
  initial begin
    repeat (5000) @(posedge clk);
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

  task automatic run(input bit l23);
    logic [31:0] prev, nw;
    rst = 1; fl = 0; pd = 0; sel23 = l23;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (4) @(posedge clk);
    #1 chk(st == TX_IDLE && v && w.d == SYNC_WORD && w.k == SYNC_K, "idle sync");
    fl = 1; repeat (3) @(posedge clk);
    #1 chk(st == TX_IDLE, "freqlock alone");
    fl = 0; pd = 1; repeat (3) @(posedge clk);
    #1 chk(st == TX_IDLE, "patterndetect alone");
    fl = 1;
    @(posedge clk); #1 chk(st == TX_EN_GEN_PATTERN, "enter EN_GEN_PATTERN");
    @(posedge clk); #1 chk(w.d == SOF_WORD && w.k == SOF_K && v, "sof");
    @(posedge clk); #1 prev = w.d; chk(w.k == 4'b0 && w.d != 0, "first prbs");
    for (int n = 0; n < 300; n++) begin
      if (n == 100) inj = 1;
      if (n == 150 || n == 151) rdy = 0;
      @(posedge clk); #1;
      inj = 0;
      if (n == 150 || n == 151) begin
        chk(!v, "stall");
      end else begin
        nw = nextw(prev, l23);
        if (n == 100) begin
          chk(w.d == (nw ^ 32'h1), "injected LSB flip");
        end else begin
          chk(w.d == nw && v, "prbs sequence");
        end
        prev = nw;
      end
      if (n == 151) rdy = 1;
    end
    rst = 1; @(posedge clk); #1 chk(st == TX_IDLE, "reset to IDLE");
  endtask

  initial begin
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
