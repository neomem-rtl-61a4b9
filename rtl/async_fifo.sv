// async_fifo: dual-clock FIFO for the monitor-to-core clock crossing.
//
// The monitors run in the memory controller's fast clock and the profiler
// core in a slower clock; page addresses and state samples cross through
// one of these each. Classic design: binary read and write pointers one bit
// wider than the address, converted to Gray code and passed through two
// flip-flops into the other domain, where full and empty are computed.
// Asynchronous FIFOs between the two domains are part of the profiler
// description; depth and construction are this design's choice.
//
// Interface: write side (wclk) pushes wdata when winc and !wfull; read side
// (rclk) shows the head on rdata whenever !rempty (first-word fall-through)
// and removes it on rinc. DEPTH must be a power of two. A write becomes
// visible to the reader after about three read clocks.
module async_fifo #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          winc,
  input  logic [DW-1:0] wdata,
  output logic          wfull,
  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          rinc,
  output logic [DW-1:0] rdata,
  output logic          rempty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;
  logic [AW:0] wbin_next, rbin_next, wgray_next, rgray_next;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign wbin_next  = wbin + (AW+1)'(winc && !wfull);
  assign wgray_next = bin2gray(wbin_next);

  always_ff @(posedge wclk) begin
    if (winc && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; wq1_rgray <= '0; wq2_rgray <= '0; wfull <= 1'b0;
    end else begin
      wbin      <= wbin_next;
      wgray     <= wgray_next;
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
      wfull     <= (wgray_next == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});
    end
  end

  // read domain
  assign rbin_next  = rbin + (AW+1)'(rinc && !rempty);
  assign rgray_next = bin2gray(rbin_next);
  assign rdata      = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; rq1_wgray <= '0; rq2_wgray <= '0; rempty <= 1'b1;
    end else begin
      rbin      <= rbin_next;
      rgray     <= rgray_next;
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
      rempty    <= (rgray_next == rq2_wgray);
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH)
    else $error("async_fifo: DEPTH must be a power of two >= 4");
endmodule
