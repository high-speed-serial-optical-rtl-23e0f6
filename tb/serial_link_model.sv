// serial_link_model: behavioural stand-in for the analog part of the link,
// for simulation only. It joins the serializer, the optical loop (laser,
// fibre, attenuator, photodiode) and the deserializer: each clock it takes the
// transmitted parallel word (20 bits in 8B/10B mode, 16 bits otherwise),
// appends it to the bit stream and returns a word cut from the stream at a
// fixed bit offset, so the receiver sees arbitrary word boundaries. Bit errors
// are introduced on request: flip_req asks for one line bit whose value is
// flip_from to be inverted in the next word (a 1->0 flip or a 0->1 flip),
// starting the search at a pseudo-random position. n10 and n01 count the
// flips made. Receiver clock recovery is not modelled: the receive side uses
// a clock of the same frequency as the transmit side.
module serial_link_model (
  input  logic        clk,
  input  logic        coded,
  input  int          offset,
  input  logic [19:0] tx_word,
  output logic [19:0] rx_word,
  input  logic        flip_req,
  input  logic        flip_from,
  output int          n10,
  output int          n01
);
  logic [19:0] prev = '0;
  logic [39:0] two;
  logic [19:0] w, mask;
  int          nb, start;

  initial begin
    rx_word = '0;
    n10 = 0;
    n01 = 0;
  end

  always @(posedge clk) begin
    nb = coded ? 20 : 16;
    two = coded ? {tx_word, prev} : {8'b0, tx_word[15:0], prev[15:0]};
    w = coded ? two[offset % 20 +: 20] : {4'b0, two[offset % 16 +: 16]};
    mask = '0;
    if (flip_req) begin
      start = int'($urandom % nb);
      for (int i = 0; i < nb; i++) begin
        if (mask == 0 && w[(start + i) % nb] == flip_from) mask[(start + i) % nb] = 1'b1;
      end
      if (mask != 0) begin
        if (flip_from) n10 <= n10 + 1;
        else           n01 <= n01 + 1;
      end
    end
    rx_word <= w ^ mask;
    prev <= tx_word;
  end
endmodule
