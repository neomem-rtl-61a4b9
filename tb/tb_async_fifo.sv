// tb_async_fifo: writer at 250 MHz-like and reader at a slower, unrelated
// clock, both with random enables; checks that every word arrives once and
// in order, that the FIFO reports full (writer waits) and empty, and that
// nothing is written while full.
module tb_async_fifo;
  localparam int unsigned DW = 32, DEPTH = 8;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic winc = 0, rinc = 0; logic [DW-1:0] wdata = 0, rdata; logic wfull, rempty;
  int checks = 0, failures = 0, fulls = 0, sent = 0, got = 0;

  async_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);
  always #2 wclk = ~wclk;
  always #7 rclk = ~rclk;

  logic [DW-1:0] q [$];

  always @(posedge wclk) if (wrst_n) begin
    if (winc && !wfull) begin q.push_back(wdata); sent++; end
    if (wfull) fulls++;
  end
  always @(negedge wclk) begin
    winc  <= (sent < 600) && ($urandom_range(0, 3) != 0);
    wdata <= $urandom;
  end

  always @(posedge rclk) if (rrst_n) begin
    if (rinc && !rempty) begin
      logic [DW-1:0] e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL read from empty model"); end
      else begin e = q.pop_front(); if (rdata != e) begin failures++; $display("FAIL %h exp %h", rdata, e); end end
      got++;
    end
  end
  always @(negedge rclk) rinc <= (got < 300) ? ($urandom_range(0, 4) == 0) : 1'b1;

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #30; wrst_n = 1; rrst_n = 1;
    wait (got == 600);
    #200;
    checks++; if (fulls == 0) begin failures++; $display("never full"); end
    checks++; if (!rempty || q.size() != 0) begin failures++; $display("not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
