// word_aligner_tb: builds the transmitted word stream (8B/10B-coded sync
// words, or raw 16-bit sync halves), cuts it into deserializer words at every
// possible bit offset, and checks that the aligner reaches sync after SYNC_N
// patterns, that its output then reproduces the transmitted words exactly,
// with patterndetect on the comma words, and that after sync a shifted stream
// no longer moves the boundary (the offset is frozen until reset).
module word_aligner_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, coded = 1;
  logic [19:0] din = '0, dout;
  logic pd, sync;

  word_aligner #(.SYNC_N(3)) dut (.clk(clk), .rst(rst), .coded(coded), .din(din), .dout(dout),
                                  .patterndetect(pd), .syncstatus(sync));

  always #5 clk = !clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  logic [19:0] txw[64];

  // transmitted words: coded = two code groups per word, raw = 16-bit halves
  task automatic build(input bit cod);
    logic rd;
    logic [10:0] r;
    logic [7:0] b;
    rd = 0;
    for (int j = 0; j < 64; j++) begin
      txw[j] = '0;
      for (int h = 0; h < 2; h++) begin
        b = (j % 2 == 0) ? SYNC_WORD[8*h +: 8] : SYNC_WORD[16 + 8*h +: 8];
        r = enc8b10b_f(b, (j % 2 == 0) && h == 0, rd);
        rd = r[10];
        if (cod) txw[j][10*h +: 10] = r[9:0];
      end
      if (!cod) txw[j] = {4'b0, (j % 2 == 0) ? SYNC_WORD[15:0] : SYNC_WORD[31:16]};
    end
  endtask

  task automatic run(input bit cod, input int off);
    int w, j0, found;
    logic [39:0] two;
    coded = cod;
    w = cod ? 20 : 16;
    build(cod);
    rst = 1; @(posedge clk); #1 rst = 0;
    found = 0;
    j0 = -1;
    for (int j = 1; j < 63; j++) begin
      // din = stream bits starting off bits into word j
      two = cod ? {txw[j+1], txw[j]} : {8'b0, txw[j+1][15:0], txw[j][15:0]};
      din = cod ? two[off +: 20] : {4'b0, two[off +: 16]};
      @(posedge clk); #1;
      if (sync && j0 < 0) begin
        for (int c = 0; c < 64; c++) if (txw[c] == dout && (c % 2) == 0) j0 = c;
        chk(j >= 2 * 3 - 1 && j <= 2 * 3 + 3, $sformatf("sync after %0d words", j));
        chk(j0 >= 0, "aligned output is a transmitted word");
      end else if (j0 >= 0) begin
        j0++;
        chk(dout == txw[j0], "aligned stream");
        chk(pd == (j0 % 2 == 0), "patterndetect");
        found++;
      end
    end
    chk(found > 40, "stream checked");
    // shift the stream by 3 bits: boundary stays frozen, pattern no longer seen
    for (int j = 1; j < 20; j++) begin
      two = cod ? {txw[j+1], txw[j]} : {8'b0, txw[j+1][15:0], txw[j][15:0]};
      din = cod ? two[(off + 3) % w +: 20] : {4'b0, two[(off + 3) % w +: 16]};
      @(posedge clk); #1;
      if (j > 1) chk(sync && !pd, "frozen after sync");
    end
  endtask

  initial begin
    for (int off = 0; off < 20; off++) run(1'b1, off);
    for (int off = 0; off < 16; off++) run(1'b0, off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
