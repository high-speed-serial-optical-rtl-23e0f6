// prbs_gen: parallel PRBS polynomial shifter.
//
// Computes the next W bits of a pseudo-random binary sequence from the W bits
// that precede them on the line. Bit 0 of a word is sent first, so the state of
// the shift register is simply the previous word: any received error-free word
// is a valid seed, which is what lets the error detector seed itself from the
// incoming data. The two lengths, 2^7-1 and 2^23-1, are the paper's; the
// generator polynomials x^7+x^6+1 and x^23+x^18+1 are the usual ITU-T O.150
// ones, chosen here because the text names only the lengths (the O.150 output
// inversion of PRBS-23 is not applied).
//
// Interface: purely combinational, nxt = f(cur, sel23). W must be at least 23.
module prbs_gen #(
  parameter int unsigned W = 32
) (
  input  logic         sel23,
  input  logic [W-1:0] cur,
  output logic [W-1:0] nxt
);
  initial assert (W >= 23) else $fatal(1, "prbs_gen: W must be >= 23");

  logic [2*W-1:0] s;

  // s[W+i] = s[W+i-ta] ^ s[W+i-tb]: x^7+x^6+1 -> taps 6,7; x^23+x^18+1 -> 18,23
  always_comb begin
    s = {{W{1'b0}}, cur};
    for (int i = 0; i < W; i++) begin
      if (sel23) s[W+i] = s[W+i-18] ^ s[W+i-23];
      else       s[W+i] = s[W+i-6]  ^ s[W+i-7];
    end
    nxt = s[2*W-1:W];
  end
endmodule
