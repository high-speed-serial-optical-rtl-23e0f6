// byte_ordering_tb: presents 32-bit words whose halves are either in order or
// swapped by one 16-bit position, with the alignment pattern in the low or
// high half, in both modes, and checks that the output always has the pattern
// in the low half and the following data in order, that nothing is passed
// before the pattern is seen, and that the decision then stays fixed.
module byte_ordering_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, coded = 1, iv = 0;
  pld_word_t in = '0, out;
  logic ov, done;

  byte_ordering dut (.clk(clk), .rst(rst), .coded(coded), .in_valid(iv), .in(in),
                     .out_valid(ov), .out(out), .done(done));

  always #5 clk = !clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  // half-word stream: h[0..] = garbage, then 2 sync words, then numbered data
  pcs_word_t h[200];

  task automatic run(input bit cod, input int shift);
    int nsync, nexp, got;
    coded = cod;
    for (int i = 0; i < 200; i++) h[i] = '{err: 2'b0, k: 2'b0, d: 16'(16'h8000 + i)};
    for (int s = 0; s < 2; s++) begin
      h[10 + 2*s] = '{err: 2'b0, k: cod ? 2'b01 : 2'b00, d: SYNC_WORD[15:0]};
      h[11 + 2*s] = '{err: 2'b0, k: 2'b00, d: SYNC_WORD[31:16]};
    end
    rst = 1; @(posedge clk); #1 rst = 0;
    nsync = 0; nexp = 16'h8000 + 14; got = 0;
    for (int j = shift; j + 1 < 200; j += 2) begin
      iv = 1;
      in = '{err: {h[j+1].err, h[j].err}, k: {h[j+1].k, h[j].k}, d: {h[j+1].d, h[j].d}};
      @(posedge clk); #1;
      iv = 0;
      if (j < 9) chk(!ov && !done, "nothing before pattern");
      if (ov) begin
        if (out.d == SYNC_WORD) nsync++;
        else begin
          chk(out.d == {16'(nexp + 1), 16'(nexp)}, $sformatf("ordered data %h", out.d));
          nexp += 2;
          got++;
        end
        if (cod && out.d == SYNC_WORD) chk(out.k == 4'b0001, "K flag with its byte");
      end
      @(posedge clk); #1;
      chk(!ov, "one output per input");
    end
    chk(nsync == 2 && got > 80 && done, $sformatf("sync %0d data %0d", nsync, got));
  endtask

  initial begin
    run(1'b1, 0); run(1'b1, 1); run(1'b0, 0); run(1'b0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
