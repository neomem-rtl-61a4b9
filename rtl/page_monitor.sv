// page_monitor: snoops memory requests and forwards their page numbers.
//
// Sits beside the path from the device-side CXL controller to the memory
// controller, in the memory clock domain. Every request (read or write) that
// the controller issues has its byte address cut to the 4KB page number,
// which is pushed into the Page Addr asynchronous FIFO towards the core. The
// monitor never stalls the memory path: if the FIFO is full the page is
// dropped and counted in 'drops'. Snooping every request and extracting the
// page address follow the profiler description; the register stage and the
// drop-on-full policy are this design's choice.
//
// Timing: one cycle from req_valid to fifo_push.
module page_monitor
  import neoprof_pkg::*;
#(
  parameter int unsigned ADDR_W = BYTE_ADDR_BITS,
  parameter int unsigned SHIFT  = PAGE_SHIFT,
  parameter int unsigned PAGE_W = ADDR_W - SHIFT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              fifo_push,
  output logic [PAGE_W-1:0] fifo_page,
  input  logic              fifo_full,
  output logic [31:0]       drops
);
  logic              v_q;
  logic [PAGE_W-1:0] page_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q    <= 1'b0;
      page_q <= '0;
      drops  <= '0;
    end else begin
      v_q    <= req_valid;
      page_q <= req_addr[ADDR_W-1:SHIFT];
      if (v_q && fifo_full) drops <= drops + 1'b1;
    end
  end

  assign fifo_push = v_q && !fifo_full;
  assign fifo_page = page_q;
endmodule
