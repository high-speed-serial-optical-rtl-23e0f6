// dec8b10b: two cascaded 8B/10B decoders with bypass.
//
// Each cycle two 10-bit code groups (bit a first, in bit 0) are decoded. The
// 6-bit and 4-bit sub-blocks are looked up separately in the clause 36 tables
// of bert_pkg, in the forms the encoder uses at the current running
// disparity; the resulting byte is then re-encoded and compared with what was
// received. A match is a good code
// group. A match only under the opposite disparity is a disparity error; no
// match at all is an invalid code group. Both are flagged in err, the "word
// error" of the error detector. The running disparity follows the received
// code, and the second decoder starts from the disparity the first one leaves
// (cascade). With en low the 16 bits pass through unchanged with no flags.
// The tables and cascading follow the standard and the paper; treating
// disparity errors as code errors is this design's choice.
//
// Timing: one word per cycle, output registered (latency 1).
module dec8b10b
  import bert_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [19:0] in,
  output pcs_word_t   out
);
  // table lookup assuming running disparity rd: returns {k, y, x}
  function automatic logic [8:0] lookup(input logic [9:0] code, input logic rd);
    logic [5:0] c6, t6;
    logic [3:0] c4, t4;
    logic [4:0] x;
    logic [2:0] y;
    logic       k, alt, rd6;
    for (int i = 0; i < 6; i++) c6[5-i] = code[i];
    for (int i = 0; i < 4; i++) c4[3-i] = code[6+i];
    x = '0;
    y = '0;
    // 6b sub-block: the form the encoder would use at this disparity
    for (int v = 31; v >= 0; v--) begin
      t6  = tab6(5'(v));
      alt = (ones6(t6) != 3'd3) || v == 7;
      if (c6 == ((rd && alt) ? ~t6 : t6)) x = 5'(v);
    end
    k = (c6 == (rd ? 6'b110000 : 6'b001111));
    if (k) x = 5'd28;
    rd6 = (ones6(c6) == 3'd3) ? rd : (ones6(c6) > 3'd3);
    if (c4 == (rd6 ? 4'b1000 : 4'b0111) &&
        (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30)) k = 1'b1;
    // 4b sub-block
    for (int v = 7; v >= 0; v--) begin
      t4  = tab4(3'(v), k, 1'b0);
      alt = k || (ones6({2'b00, t4}) != 3'd2) || v == 3;
      if (c4 == ((rd6 && alt) ? ~t4 : t4)) y = 3'(v);
    end
    if (!k && c4 == (rd6 ? 4'b1000 : 4'b0111)) y = 3'd7;   // D.x.A7
    return {k, y, x};
  endfunction

  // result of one decoder: {rd_out, err, k, data}
  function automatic logic [10:0] dec1(input logic [9:0] code, input logic rd);
    logic [8:0]  l_same, l_other;
    logic [10:0] e_same, e_other;
    logic [3:0]  n;
    l_same  = lookup(code, rd);
    l_other = lookup(code, !rd);
    e_same  = enc8b10b_f(l_same[7:0],  l_same[8],  rd);
    e_other = enc8b10b_f(l_other[7:0], l_other[8], !rd);
    n = '0;
    for (int i = 0; i < 10; i++) n = n + 4'(code[i]);
    if (e_same[9:0] == code)       dec1 = {e_same[10],  1'b0, l_same};
    else if (e_other[9:0] == code) dec1 = {e_other[10], 1'b1, l_other};
    else                           dec1 = {(n == 4'd5) ? rd : (n > 4'd5), 1'b1, l_same};
  endfunction

  logic        rd;
  logic [10:0] r0, r1;

  always_comb begin
    r0 = dec1(in[9:0],   rd);
    r1 = dec1(in[19:10], r0[10]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd  <= 1'b0;
      out <= '0;
    end else if (en) begin
      rd  <= r1[10];
      out <= '{err: {r1[9], r0[9]}, k: {r1[8], r0[8]}, d: {r1[7:0], r0[7:0]}};
    end else begin
      out <= '{err: 2'b0, k: 2'b0, d: in[15:0]};
    end
  end
endmodule
