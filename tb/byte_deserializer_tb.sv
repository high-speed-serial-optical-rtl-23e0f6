// byte_deserializer_tb: feeds numbered 16-bit words with flags and checks
// that each output pairs two consecutive inputs (earlier one low), that
// out_valid comes every second cycle, and that K and error flags follow
// their bytes.
module byte_deserializer_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  pcs_word_t in = '0;
  pld_word_t out;
  logic v;

  byte_deserializer dut (.clk(clk), .rst(rst), .in(in), .out(out), .out_valid(v));

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

  initial begin
    int nv, lastv;
    nv = 0; lastv = -10;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 200; n++) begin
      in = '{err: 2'(n % 4), k: 2'((n / 4) % 4), d: 16'(n)};
      @(posedge clk); #1;
      if (v) begin
        int lo;
        lo = int'(out.d[15:0]);
        chk(out.d[31:16] == 16'(lo + 1) && lo % 2 == 0, "pair of consecutive words");
        chk(out.err == {2'((lo + 1) % 4), 2'(lo % 4)} &&
            out.k == {2'(((lo + 1) / 4) % 4), 2'((lo / 4) % 4)}, "flags follow bytes");
        if (nv > 0) chk(n - lastv == 2, "one word every two cycles");
        lastv = n;
        nv++;
      end
    end
    chk(nv >= 98, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
