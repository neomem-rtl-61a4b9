// hot_page_buffer: circular buffer of detected hot page addresses.
//
// New hot pages from the filter are written at the tail; the host reads them
// from the head with GetHotPage, and GetNrHotPage reports how many are held.
// When the buffer is full a new hot page is dropped and counted in
// 'overflows' (the host is expected to drain the buffer every migration
// interval). 'clear' (the Reset command) empties it. The ring organisation
// and the entry count follow the profiler description; dropping on overflow
// is this design's choice.
//
// Timing: a push is stored at the clock edge. A pop reads the head into
// rd_data at the next edge (one-cycle read latency, as a synchronous SRAM).
module hot_page_buffer
  import neoprof_pkg::*;
#(
  parameter int unsigned DEPTH = HOT_BUF_ENTRIES,
  parameter int unsigned DW    = PAGE_ADDR_BITS,
  parameter int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [DW-1:0]    push_data,
  input  logic             pop,
  output logic [DW-1:0]    rd_data,
  output logic [CNT_W-1:0] count,
  output logic             empty,
  output logic             full,
  output logic [31:0]      overflows
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == CNT_W'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] a);
    return (a == AW'(DEPTH - 1)) ? '0 : a + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push && !clear) mem[wptr] <= push_data;
    if (do_pop) rd_data <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      count     <= '0;
      overflows <= '0;
    end else if (clear) begin
      wptr      <= '0;
      rptr      <= '0;
      count     <= '0;
      overflows <= '0;
    end else begin
      if (do_push) wptr <= inc(wptr);
      if (do_pop)  rptr <= inc(rptr);
      if (push && !do_push) overflows <= overflows + 1'b1;
      count <= count + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end
endmodule
