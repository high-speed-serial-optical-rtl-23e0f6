// sync_2ff: two-flip-flop synchronizer for slow or level signals crossing
// into the clock domain of clk. No reset: the chain settles to the input
// within two cycles. Used for resets, lock flags and configuration bits.
module sync_2ff #(
  parameter int unsigned N = 1
) (
  input  logic         clk,
  input  logic [N-1:0] d,
  output logic [N-1:0] q
);
  logic [N-1:0] s1;

  always_ff @(posedge clk) begin
    s1 <= d;
    q  <= s1;
  end
endmodule
