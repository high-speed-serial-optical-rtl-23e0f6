// enc8b10b: two cascaded 8B/10B encoders with bypass.
//
// Each cycle two bytes are encoded into two 10-bit code groups following the
// IEEE 802.3 clause 36 tables (held in bert_pkg::enc8b10b_f). The encoders are
// cascaded: byte 0 is encoded with the running disparity left by the previous
// cycle, byte 1 with the disparity left by byte 0, and the disparity after
// byte 1 is stored for the next cycle. With en low the encoder is bypassed and
// the 16 data bits go straight to out[15:0] (the serializer then works in
// 16-bit mode); the running disparity is held. Cascading and bypass follow the
// paper; the initial disparity (negative) is this design's choice.
//
// Timing: one word per cycle, output registered (latency 1).
module enc8b10b
  import bert_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  pcs_word_t   in,
  output logic [19:0] out
);
  logic        rd;
  logic [10:0] r0, r1;

  always_comb begin
    r0 = enc8b10b_f(in.d[7:0],  in.k[0], rd);
    r1 = enc8b10b_f(in.d[15:8], in.k[1], r0[10]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd  <= 1'b0;
      out <= '0;
    end else if (en) begin
      out <= {r1[9:0], r0[9:0]};
      rd  <= r1[10];
    end else begin
      out <= {4'b0, in.d};
    end
  end
endmodule
