// state_monitor: bandwidth and read/write ratio monitor.
//
// In the memory clock domain it counts, over a sampling window, the sampled
// cycles, the cycles in which read data is transferred and the cycles in
// which write data is transferred. After WINDOW cycles it sends the three
// counts as one state_sample_t through the State asynchronous FIFO and
// starts a new window; the core adds the samples up for GetNrSample,
// GetRdCnt and GetWrCnt, so the host can form bandwidth utilisation
// (rd + wr) / cycles and the read/write ratio. If the FIFO is full the window
// is simply extended until the sample can be sent, so no cycle is lost.
// Counting data-transfer cycles follows the profiler description; the
// window length and the transfer of samples are this design's choices.
//
// Timing: a sample is pushed in the cycle after its last counted cycle.
module state_monitor
  import neoprof_pkg::*;
#(
  parameter int unsigned WINDOW = STATE_WINDOW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rd_beat,   // read data transferred this cycle
  input  logic          wr_beat,   // write data transferred this cycle
  output logic          fifo_push,
  output state_sample_t fifo_data,
  input  logic          fifo_full
);
  state_sample_t acc;
  logic          send;

  assign send      = (acc.cycles >= 32'(WINDOW)) && !fifo_full;
  assign fifo_push = send;
  assign fifo_data = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (send) begin
      acc.cycles <= 32'd1;
      acc.rd     <= 32'(rd_beat);
      acc.wr     <= 32'(wr_beat);
    end else begin
      acc.cycles <= acc.cycles + 1'b1;
      acc.rd     <= acc.rd + 32'(rd_beat);
      acc.wr     <= acc.wr + 32'(wr_beat);
    end
  end
endmodule
