// reset_ctrl_tb: checks that the transmit reset is released HOLD cycles
// (plus synchronizer delay) after the PLL locks, that the receive reset waits
// for frequency lock, that loss of frequency lock resets only the receive
// side, and that the user button resets both.
module reset_ctrl_tb;
  localparam int HOLD = 16;
  int checks = 0, failures = 0;
  logic clk = 0, btn = 0, pll = 0, frq = 0, tx_rst, rx_rst;

  reset_ctrl #(.HOLD(HOLD)) dut (.clk(clk), .rst_btn(btn), .pll_locked(pll), .rx_freqlock(frq),
                                 .tx_rst(tx_rst), .rx_rst(rx_rst));

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

  // cycles until sig goes low
  task automatic wait_low(ref logic sig, output int n);
    n = 0;
    while (sig && n < 1000) begin @(posedge clk); #1 n++; end
  endtask

  initial begin
    int n;
    btn = 1;
    repeat (5) @(posedge clk);
    #1 btn = 0;
    repeat (50) @(posedge clk);
    #1 chk(tx_rst && rx_rst, "held without PLL lock");
    pll = 1;
    wait_low(tx_rst, n);
    chk(n >= HOLD + 2 && n <= HOLD + 4, $sformatf("tx release after %0d", n));
    repeat (30) @(posedge clk);
    #1 chk(rx_rst, "rx held without freqlock");
    frq = 1;
    wait_low(rx_rst, n);
    chk(n >= HOLD + 2 && n <= HOLD + 4, $sformatf("rx release after %0d", n));
    frq = 0;
    repeat (4) @(posedge clk);
    #1 chk(rx_rst && !tx_rst, "loss of freqlock resets rx only");
    frq = 1;
    wait_low(rx_rst, n);
    btn = 1;
    repeat (4) @(posedge clk);
    #1 chk(rx_rst && tx_rst, "button resets both");
    btn = 0;
    wait_low(tx_rst, n);
    wait_low(rx_rst, n);
    chk(!tx_rst && !rx_rst, "running again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
