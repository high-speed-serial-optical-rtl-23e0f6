// prbs_gen_tb: checks the parallel PRBS shifter against a bit-serial
// generator built from the polynomial recurrences, for both lengths, and
// checks the PRBS-7 period (127 words of 32 bits) and its ones count (64 per
// 127 bits).
module prbs_gen_tb;
  localparam int W = 32;
  int checks = 0, failures = 0;
  logic         sel23;
  logic [W-1:0] cur, nxt;

  prbs_gen #(.W(W)) dut (.sel23(sel23), .cur(cur), .nxt(nxt));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit-serial reference: s holds the last 23 bits, newest in bit 0
  task automatic ref_run(input bit l23, input int nwords);
    bit [22:0] s;
    bit [W-1:0] w, exp;
    bit b;
    int ones;
    s = 23'h5A5A5;
    w = '0;
    for (int i = 0; i < W; i++) begin            // first word straight from the register
      b = l23 ? (s[17] ^ s[22]) : (s[5] ^ s[6]);
      s = {s[21:0], b};
      w[i] = b;
    end
    sel23 = l23;
    cur = w;
    ones = 0;
    for (int n = 0; n < nwords; n++) begin
      exp = '0;
      for (int i = 0; i < W; i++) begin
        b = l23 ? (s[17] ^ s[22]) : (s[5] ^ s[6]);
        s = {s[21:0], b};
        exp[i] = b;
      end
      #1;
      checks++;
      if (nxt !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch l23=%0d word %0d: %h vs %h", l23, n, nxt, exp);
      end
      cur = nxt;
      ones += $countones(nxt);
    end
  endtask

  initial begin
    logic [W-1:0] first;
    ref_run(1'b0, 500);
    ref_run(1'b1, 2000);
    // PRBS-7 period
    sel23 = 1'b0;
    cur = 32'hF100_0000;
    #1 first = nxt;
    begin
      int ones, period;
      ones = 0; period = 0;
      for (int n = 1; n <= 200; n++) begin
        cur = nxt; #1;
        ones += $countones(cur);
        if (nxt == first && period == 0) period = n;
      end
      checks++;
      if (period != 127) begin failures++; $display("PRBS7 period %0d", period); end
      ones = 0;
      cur = first;
      for (int n = 0; n < 127; n++) begin #1 ones += $countones(cur); cur = nxt; end
      checks++;
      if (ones != 64 * 32) begin failures++; $display("PRBS7 ones %0d", ones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
