// dec8b10b_tb: decodes code groups copied from the IEEE 802.3 clause 36
// tables and checks the bytes and K flags; checks that a code group not in
// the tables and a valid code group of the wrong disparity are flagged; then
// runs a random byte stream (with K28.5 and K27.7 inserted) through the
// encoder and back and checks every byte and flag; bypass passes bits through.
module dec8b10b_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, en = 1;
  logic [19:0] din = '0, enc_out;
  pcs_word_t out, enc_in = '0, dec2_out;

  dec8b10b dut (.clk(clk), .rst(rst), .en(en), .in(din), .out(out));
  enc8b10b u_enc (.clk(clk), .rst(rst), .en(1'b1), .in(enc_in), .out(enc_out));
  dec8b10b u_dec2 (.clk(clk), .rst(rst), .en(1'b1), .in(enc_out), .out(dec2_out));

  always #5 clk = !clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [9:0] s2c(input logic [9:0] s);
    for (int i = 0; i < 10; i++) s2c[i] = s[9-i];
  endfunction

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  task automatic pair(input logic [9:0] c0, input logic [9:0] c1, input logic [15:0] d,
                      input logic [1:0] k, input logic [1:0] err, input string m);
    din = {s2c(c1), s2c(c0)};
    @(posedge clk); #1;
    chk(out.err == err && (err != 2'b00 || (out.d == d && out.k == k)), m);
  endtask

  pcs_word_t q[$];

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    pair(10'b0011111010, 10'b0101010101, 16'h4ABC, 2'b01, 2'b00, "K28.5- D10.2");
    pair(10'b0110001011, 10'b0001110100, 16'h0700, 2'b00, 2'b00, "D0.0+ D7.0+");
    pair(10'b1000110111, 10'b1101001000, 16'hEBF1, 2'b00, 2'b00, "D17.7 D11.7");
    pair(10'b0011111000, 10'b1101101000, 16'hFBFC, 2'b11, 2'b00, "K28.7 K27.7");
    pair(10'b1100011100, 10'b1010101010, 16'hB563, 2'b00, 2'b00, "D3.3 D21.5");
    // RD is negative now: K28.5+ form is a disparity error, 0000011111 not a code
    pair(10'b1100000101, 10'b1010101010, 16'hB5BC, 2'b01, 2'b01, "disparity error");
    pair(10'b0011111010, 10'b0000011111, 16'h0000, 2'b00, 2'b10, "invalid code");
    pair(10'b0000000000, 10'b1111111111, 16'h0000, 2'b00, 2'b11, "invalid codes");
    // round trip
    for (int n = 0; n < 4000; n++) begin
      enc_in = '{err: 2'b0, k: 2'b0, d: 16'($urandom)};
      if (n % 37 == 0) begin enc_in.k[0] = 1'b1; enc_in.d[7:0] = 8'hBC; end
      if (n % 53 == 0) begin enc_in.k[1] = 1'b1; enc_in.d[15:8] = 8'hFB; end
      q.push_back(enc_in);
      @(posedge clk); #1;
      if (n >= 1) begin
        pcs_word_t e;
        e = q.pop_front();
        chk(dec2_out.err == 2'b00 && dec2_out.d == e.d && dec2_out.k == e.k, $sformatf("round trip %h %b %b vs %h %b", dec2_out.d, dec2_out.k, dec2_out.err, e.d, e.k));
      end
    end
    en = 0;
    din = 20'hF1234;
    @(posedge clk); #1 chk(out.d == 16'h1234 && out.k == 2'b00 && out.err == 2'b00, "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
