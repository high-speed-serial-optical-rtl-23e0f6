// reset_ctrl: reset sequencing for the transceiver channel and the BERT logic.
//
// The transmit side is held in reset until the transmit clock synthesizer
// (CMU PLL) reports lock and has stayed locked for HOLD cycles. The receive
// side is held until the transmit side is running and the clock recovery unit
// has reported frequency lock for HOLD cycles. A press of the user reset
// button, or loss of either lock, puts the affected side back into reset, so a
// failed synchronization can be retried by resetting. The paper only names a
// reset block; this sequence is this design's choice.
//
// Interface: rst_btn, pll_locked and rx_freqlock may be asynchronous (they
// are synchronized here). tx_rst and rx_rst are synchronous to clk, active
// high.
module reset_ctrl #(
  parameter int unsigned HOLD = 16
) (
  input  logic clk,
  input  logic rst_btn,
  input  logic pll_locked,
  input  logic rx_freqlock,
  output logic tx_rst,
  output logic rx_rst
);
  localparam int unsigned CW = $clog2(HOLD + 1);

  logic          btn_s, pll_s, frq_s;
  logic [CW-1:0] tx_cnt, rx_cnt;

  sync_2ff #(.N(3)) u_sync (.clk(clk), .d({rst_btn, pll_locked, rx_freqlock}),
                            .q({btn_s, pll_s, frq_s}));

  always_ff @(posedge clk) begin
    if (btn_s || !pll_s) begin
      tx_cnt <= '0;
      tx_rst <= 1'b1;
    end else if (tx_cnt != CW'(HOLD)) begin
      tx_cnt <= tx_cnt + 1'b1;
      tx_rst <= 1'b1;
    end else begin
      tx_rst <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (btn_s || tx_rst || !frq_s) begin
      rx_cnt <= '0;
      rx_rst <= 1'b1;
    end else if (rx_cnt != CW'(HOLD)) begin
      rx_cnt <= rx_cnt + 1'b1;
      rx_rst <= 1'b1;
    end else begin
      rx_rst <= 1'b0;
    end
  end
endmodule
