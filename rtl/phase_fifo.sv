// phase_fifo: dual-clock FIFO between the programmable logic and the
// transceiver clock domains (the transmit and receive phase-compensation FIFOs).
//
// The paper gives the purpose (absorbing phase differences between the PLD and
// transceiver clocks); the construction is the usual one chosen here: a
// register array indexed by binary pointers, with Gray-coded copies of each
// pointer passed through two flip-flops into the other clock domain for the
// full/empty decisions. DEPTH must be a power of two.
//
// Interface: show-ahead read. rdata holds the oldest word whenever empty is
// low; ren pops it. rcount is the fill level as seen from the read side
// (it may lag new writes by up to three read clocks). Writes when full and
// reads when empty are ignored.
module phase_fifo #(
  parameter int unsigned WIDTH = 40,
  parameter int unsigned DEPTH = 8
) (
  input  logic                     wclk,
  input  logic                     wrst,
  input  logic                     wen,
  input  logic [WIDTH-1:0]         wdata,
  output logic                     full,
  input  logic                     rclk,
  input  logic                     rrst,
  input  logic                     ren,
  output logic [WIDTH-1:0]         rdata,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   rcount
);
  localparam int unsigned AW = $clog2(DEPTH);

  initial assert (DEPTH == (1 << AW)) else $fatal(1, "phase_fifo: DEPTH must be a power of two");

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, rbin, wgray, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2, wbin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write side
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wen && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wen && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  // read side
  assign empty  = (rgray == wgray_r2);
  assign wbin_r = gray2bin(wgray_r2);
  assign rcount = wbin_r - rbin;
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (ren && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
endmodule
