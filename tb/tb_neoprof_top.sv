// tb_neoprof_top: end-to-end test of the profiler at reduced sizes (W=2048,
// K=8, 8-bit counters, 64-entry hot page buffer) so that every mechanism
// occurs: clock crossing of pages and state samples, hot page detection,
// duplicate filtering, counter saturation, hot page buffer overflow, Page
// Addr FIFO overrun, histogram, threshold change and Reset.
module tb_neoprof_top;
  import neoprof_pkg::*;
  localparam int unsigned W = 2048, D = 2, K = 8, CNT_W = 8, PAGE_W = PAGE_ADDR_BITS, HOT_ENTRIES = 64,
                          BINS = HIST_BINS, BIN_SHIFT = 2, HSTAGES = HASH_STAGES, WINDOW = 64;
  localparam int unsigned N_MAIN = 4000, N_BURST = 1500;
  localparam int unsigned HOT_SET = 4, COLD_SPAN = 256;
  localparam bit REQUIRE_ALL = 1;

  logic clk_mem = 0, rst_mem_n = 0, clk_core = 0, rst_core_n = 0;
  logic req_valid, rd_beat, wr_beat; logic [PAGE_W+PAGE_SHIFT-1:0] req_addr;
  logic [31:0] page_drops;
  logic mmio_wr, mmio_rd; logic [MMIO_ADDR_BITS-1:0] mmio_addr;
  logic [MMIO_DATA_BITS-1:0] mmio_wdata, mmio_rdata; logic mmio_rvalid;

  neoprof_top #(.W(W), .D(D), .K(K), .CNT_W(CNT_W), .PAGE_W(PAGE_W), .HOT_ENTRIES(HOT_ENTRIES),
                .BINS(BINS), .BIN_SHIFT(BIN_SHIFT), .HSTAGES(HSTAGES), .WINDOW(WINDOW)) dut (.*);

  initial begin
    #3000000; $display("watchdog"); $display("TB_RESULT checks=0 failures=1"); $finish;
  end

  `include "neoprof_top_tb_body.svh"
endmodule
