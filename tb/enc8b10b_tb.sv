// enc8b10b_tb: checks the cascaded encoder against code groups copied from
// the IEEE 802.3 clause 36 tables (written here abcdei fghj, a first), for a
// sequence whose running disparity the table values determine, and then
// checks properties of a long random stream: every code group has 4, 5 or 6
// ones, the running disparity stays within +-1, no run exceeds 5 bits, and
// the 256 data code groups at each disparity are distinct. Bypass mode passes
// the 16 bits through.
module enc8b10b_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, en = 1;
  pcs_word_t in = '0;
  logic [19:0] out;

  enc8b10b dut (.clk(clk), .rst(rst), .en(en), .in(in), .out(out));

  always #5 clk = !clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table string (a = MSB of the literal) to transmission order (a = bit 0)
  function automatic logic [9:0] s2c(input logic [9:0] s);
    for (int i = 0; i < 10; i++) s2c[i] = s[9-i];
  endfunction

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  // send a pair, check both code groups
  task automatic pair(input logic [7:0] b0, input logic k0, input logic [7:0] b1, input logic k1,
                      input logic [9:0] e0, input logic [9:0] e1, input string m);
    in = '{err: 2'b0, k: {k1, k0}, d: {b1, b0}};
    @(posedge clk); #1;
    chk(out[9:0] == s2c(e0) && out[19:10] == s2c(e1), m);
  endtask

  int rd_sum, run, last, ones;
  logic seen_n[1024];

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // RD- at start
    pair(8'hBC, 1, 8'h4A, 0, 10'b0011111010, 10'b0101010101, "K28.5- D10.2+");
    pair(8'h00, 0, 8'h07, 0, 10'b0110001011, 10'b0001110100, "D0.0+ D7.0+");
    pair(8'hF1, 0, 8'hEB, 0, 10'b1000110111, 10'b1101001000, "D17.7- (A7) D11.7+ (A7)");
    pair(8'hFC, 1, 8'hFB, 1, 10'b0011111000, 10'b1101101000, "K28.7- K27.7-");
    pair(8'h63, 0, 8'hB5, 0, 10'b1100011100, 10'b1010101010, "D3.3- D21.5");
    pair(8'h00, 0, 8'hBC, 1, 10'b1001110100, 10'b0011111010, "D0.0- K28.5-");
    pair(8'h1C, 1, 8'hE0, 0, 10'b1100001011, 10'b0110001110, "K28.0+ D0.7+");
    // random stream properties
    rd_sum = 0; run = 0; last = 2;
    for (int n = 0; n < 4000; n++) begin
      in = '{err: 2'b0, k: 2'b0, d: 16'($urandom)};
      if (n % 50 == 0) begin in.k[0] = 1'b1; in.d[7:0] = 8'hBC; end
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        ones = $countones(out[g*10 +: 10]);
        chk(ones >= 4 && ones <= 6, "balance 4..6");
        if (ones != 5) begin
          if (rd_sum == 0) rd_sum = (ones > 5) ? 1 : -1;   // first unbalanced code sets the sign
          else rd_sum += 2 * ones - 10;
          chk(rd_sum == 1 || rd_sum == -1, "running disparity");
        end
        for (int i = 0; i < 10; i++) begin
          if (out[g*10 + i] == last) run++; else run = 1;
          last = out[g*10 + i];
          if (run > 5) begin failures++; $display("FAIL run length at %0t", $time); end
        end
      end
    end
    // 256 distinct codes per disparity: reset gives RD-, encode D.x then K28.5 pairs
    for (int i = 0; i < 1024; i++) seen_n[i] = 0;
    begin
      int dup;
      dup = 0;
      for (int b = 0; b < 256; b++) begin
        rst = 1; @(posedge clk); #1 rst = 0;
        in = '{err: 2'b0, k: 2'b0, d: {8'h00, 8'(b)}};
        @(posedge clk); #1;
        if (seen_n[out[9:0]]) dup++;
        seen_n[out[9:0]] = 1;
      end
      chk(dup == 0, "distinct RD- data codes");
    end
    en = 0;
    in = '{err: 2'b0, k: 2'b11, d: 16'hA5C3};
    @(posedge clk); #1 chk(out == 20'h0A5C3, "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
