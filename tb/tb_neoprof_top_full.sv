// tb_neoprof_top_full: one complete profiling period on the profiler at its
// default sizes (2 x 512K sketch, 128 segments, 16-bit counters, 16K hot
// page buffer, 64 bins): set theta, stream requests, read the hot pages,
// read the state totals, run and read the histogram of all 512K counters,
// overrun the Page Addr FIFO, Reset and run a short second period.
module tb_neoprof_top_full;
  import neoprof_pkg::*;
  localparam int unsigned W = SKETCH_WIDTH, D = SKETCH_LANES, K = SKETCH_SEGMENTS, CNT_W = COUNTER_BITS,
                          PAGE_W = PAGE_ADDR_BITS, HOT_ENTRIES = HOT_BUF_ENTRIES, BINS = HIST_BINS,
                          BIN_SHIFT = HIST_BIN_SHIFT, HSTAGES = HASH_STAGES, WINDOW = STATE_WINDOW;
  localparam int unsigned N_MAIN = 3000, N_BURST = 1000;
  localparam int unsigned HOT_SET = 16, COLD_SPAN = 1 << 20;
  localparam bit REQUIRE_ALL = 0;

  logic clk_mem = 0, rst_mem_n = 0, clk_core = 0, rst_core_n = 0;
  logic req_valid, rd_beat, wr_beat; logic [PAGE_W+PAGE_SHIFT-1:0] req_addr;
  logic [31:0] page_drops;
  logic mmio_wr, mmio_rd; logic [MMIO_ADDR_BITS-1:0] mmio_addr;
  logic [MMIO_DATA_BITS-1:0] mmio_wdata, mmio_rdata; logic mmio_rvalid;

  neoprof_top dut (.*);

  initial begin
    #20000000; $display("watchdog"); $display("TB_RESULT checks=0 failures=1"); $finish;
  end

  `include "neoprof_top_tb_body.svh"
endmodule
