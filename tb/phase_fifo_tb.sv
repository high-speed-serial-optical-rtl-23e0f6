// phase_fifo_tb: writes a counting sequence on one clock and reads it on an
// unrelated clock (both faster- and slower-reader cases), checking order,
// that nothing is lost or duplicated, that full and empty are reached and
// respected, and the read-side fill count when idle.
module phase_fifo_tb;
  localparam int W = 40, D = 8;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1, wen = 0, ren = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic full, empty;
  logic [$clog2(D):0] rcount;
  int wper = 5, rper = 7;
  int nexp = 0, nw = 0, saw_full = 0, saw_empty = 0;

  phase_fifo #(.WIDTH(W), .DEPTH(D)) dut (.wclk(wclk), .wrst(wrst), .wen(wen), .wdata(wdata),
    .full(full), .rclk(rclk), .rrst(rrst), .ren(ren), .rdata(rdata), .empty(empty), .rcount(rcount));

  always #(wper) wclk = !wclk;
  always #(rper) rclk = !rclk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge wclk) begin
    if (!wrst && wen && !full) begin
      nw <= nw + 1;
      wdata <= W'(nw + 1) * 40'h1_0001;
    end
    if (full) saw_full <= saw_full + 1;
    wen <= ($urandom % 4) != 0;
  end

  always @(posedge rclk) begin
    if (!rrst && ren && !empty) begin
      checks++;
      if (rdata !== W'(nexp) * 40'h1_0001) begin
        failures++;
        if (failures < 5) $display("FAIL read %h expected %0d", rdata, nexp);
      end
      nexp <= nexp + 1;
    end
    if (empty) saw_empty <= saw_empty + 1;
    ren <= ($urandom % 3) != 0;
  end

  initial begin
    repeat (4) @(posedge rclk);
    wrst = 0; rrst = 0;
    wait (nexp >= 1000);
    wper = 7; rper = 3;
    wait (nexp >= 2000);
    @(posedge wclk); wen = 0;
    force wen = 0;
    repeat (20) @(posedge rclk);
    checks++;
    if (!(empty && rcount == 0 && nexp == nw)) begin
      failures++; $display("FAIL drain: nexp=%0d nw=%0d", nexp, nw);
    end
    checks++;
    if (saw_full == 0 || saw_empty == 0) begin
      failures++; $display("FAIL full/empty never reached %0d %0d", saw_full, saw_empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
