// byte_serializer_tb: a FIFO model feeds 32-bit words; checks that idle words
// are sent until the FIFO holds two words, that then each word comes out as
// low half then high half on consecutive cycles (one word per two clocks),
// with K flags following their bytes, and that an empty FIFO sends idle.
module byte_serializer_tb;
  import bert_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  pld_word_t q[$];
  pld_word_t head, idle;
  logic ren;
  pcs_word_t out;
  logic [3:0] cnt;
  logic [15:0] got[$];

  assign head = (q.size() > 0) ? q[0] : '0;
  assign cnt  = 4'(q.size());
  assign idle = '{err: 4'b0, k: 4'b0001, d: 32'h4A4A_F6BC};

  byte_serializer dut (.clk(clk), .rst(rst), .fifo_empty(q.size() == 0), .fifo_count(cnt),
    .fifo_word(head), .idle_word(idle), .fifo_ren(ren), .out(out));

  always #5 clk = !clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && ren) void'(q.pop_front());

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    q.push_back('{err: 4'b0, k: 4'b0100, d: 32'h1112_0000});
    repeat (6) begin
      @(posedge clk); #1;
      chk(out.d == 16'hF6BC || out.d == 16'h4A4A, "idle while not primed");
    end
    for (int i = 1; i < 40; i++) q.push_back('{err: 4'b0, k: 4'b0100, d: {16'(i * 2 + 1), 16'(i * 2)} + 32'h1111_0000});
    // find the first low half of word 0
    cyc = 0;
    while (out.d != 16'h0000 && cyc < 20) begin @(posedge clk); #1 cyc++; end
    for (int i = 0; i < 40; i++) begin
      chk(out.d == 16'(i * 2) + 16'h0000 && out.k == 2'b00, $sformatf("low half %0d", i));
      @(posedge clk); #1;
      chk(out.d == 16'(i * 2 + 1) + 16'h1111 && out.k == 2'b01, $sformatf("high half %0d", i));
      @(posedge clk); #1;
    end
    repeat (2) begin
      chk(out.d == 16'hF6BC && out.k == 2'b01, "idle low when empty");
      @(posedge clk); #1;
      chk(out.d == 16'h4A4A && out.k == 2'b00, "idle high when empty");
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
