// neoprof_top: the NeoProf memory access profiler of a CXL memory device.
//
// Two clock domains. In the memory controller's clock (clk_mem) the page
// monitor snoops every request address the device-side CXL controller sends
// to the memory controller and the state monitor counts the cycles carrying
// read and write data. Two asynchronous FIFOs (page addresses, state
// samples) carry their output into the low-frequency core clock (clk_core),
// where the NeoProf core runs the Count-Min sketch hot page detector, keeps
// the hot page buffer, the state totals and the histogram, and answers the
// host's memory-mapped commands (see neoprof_core for the command map).
//
// The CXL controller, the memory controller and the DRAM are outside: their
// request and data-valid signals are inputs here, and the MMIO command port
// is the register window the CXL controller decodes for the profiler. The
// profiler only observes the memory path; it never stalls it.
//
// The split into monitors, FIFOs and core, and the two clock domains, follow
// the profiler description; FIFO depths and the reset per domain (each reset
// synchronised to its own clock outside this module) are this design's
// choice. A linter may flag rst_core_n as used both synchronously and
// asynchronously: that is the core's simulation-only assertion (see
// neoprof_core), not a reset synchroniser problem.
module neoprof_top
  import neoprof_pkg::*;
#(
  parameter int unsigned W           = SKETCH_WIDTH,
  parameter int unsigned D           = SKETCH_LANES,
  parameter int unsigned K           = SKETCH_SEGMENTS,
  parameter int unsigned CNT_W       = COUNTER_BITS,
  parameter int unsigned PAGE_W      = PAGE_ADDR_BITS,
  parameter int unsigned HOT_ENTRIES = HOT_BUF_ENTRIES,
  parameter int unsigned BINS        = HIST_BINS,
  parameter int unsigned BIN_SHIFT   = HIST_BIN_SHIFT,
  parameter int unsigned HSTAGES     = HASH_STAGES,
  parameter int unsigned WINDOW      = STATE_WINDOW,
  parameter int unsigned FIFO_DEPTH  = CDC_FIFO_DEPTH
) (
  // memory clock domain: snooped request path
  input  logic                       clk_mem,
  input  logic                       rst_mem_n,
  input  logic                       req_valid,
  input  logic [PAGE_W+PAGE_SHIFT-1:0] req_addr,
  input  logic                       rd_beat,
  input  logic                       wr_beat,
  output logic [31:0]                page_drops,
  // core clock domain: MMIO commands from the host
  input  logic                       clk_core,
  input  logic                       rst_core_n,
  input  logic                       mmio_wr,
  input  logic                       mmio_rd,
  input  logic [MMIO_ADDR_BITS-1:0]  mmio_addr,
  input  logic [MMIO_DATA_BITS-1:0]  mmio_wdata,
  output logic [MMIO_DATA_BITS-1:0]  mmio_rdata,
  output logic                       mmio_rvalid
);
  logic              pg_push, pg_full, pg_empty, pg_pop;
  logic [PAGE_W-1:0] pg_wdata, pg_rdata;
  logic              st_push, st_full, st_empty, st_pop;
  state_sample_t     st_wdata, st_rdata;

  page_monitor #(.ADDR_W(PAGE_W + PAGE_SHIFT), .SHIFT(PAGE_SHIFT)) u_pmon (
    .clk(clk_mem), .rst_n(rst_mem_n),
    .req_valid, .req_addr,
    .fifo_push(pg_push), .fifo_page(pg_wdata), .fifo_full(pg_full), .drops(page_drops)
  );

  state_monitor #(.WINDOW(WINDOW)) u_smon (
    .clk(clk_mem), .rst_n(rst_mem_n), .rd_beat, .wr_beat,
    .fifo_push(st_push), .fifo_data(st_wdata), .fifo_full(st_full)
  );

  async_fifo #(.DW(PAGE_W), .DEPTH(FIFO_DEPTH)) u_page_fifo (
    .wclk(clk_mem), .wrst_n(rst_mem_n), .winc(pg_push), .wdata(pg_wdata), .wfull(pg_full),
    .rclk(clk_core), .rrst_n(rst_core_n), .rinc(pg_pop), .rdata(pg_rdata), .rempty(pg_empty)
  );

  async_fifo #(.DW($bits(state_sample_t)), .DEPTH(FIFO_DEPTH)) u_state_fifo (
    .wclk(clk_mem), .wrst_n(rst_mem_n), .winc(st_push), .wdata(st_wdata), .wfull(st_full),
    .rclk(clk_core), .rrst_n(rst_core_n), .rinc(st_pop), .rdata(st_rdata), .rempty(st_empty)
  );

  neoprof_core #(
    .W(W), .D(D), .K(K), .CNT_W(CNT_W), .PAGE_W(PAGE_W), .HOT_ENTRIES(HOT_ENTRIES),
    .BINS(BINS), .BIN_SHIFT(BIN_SHIFT), .HSTAGES(HSTAGES)
  ) u_core (
    .clk(clk_core), .rst_n(rst_core_n),
    .page_empty(pg_empty), .page_data(pg_rdata), .page_pop(pg_pop),
    .st_empty, .st_data(st_rdata), .st_pop,
    .mmio_wr, .mmio_rd, .mmio_addr, .mmio_wdata, .mmio_rdata, .mmio_rvalid
  );
endmodule
