// neoprof_core: command decoder and statistics of the NeoProf profiler.
//
// Runs in the low-frequency clock. It pops page addresses from the Page Addr
// FIFO into the hot page detector (one per cycle), pushes new hot pages into
// the hot page buffer, adds the state monitor's samples into 64-bit cycle,
// read and write totals, and owns the histogram unit. The host controls it
// through memory-mapped registers, one command per offset:
//   0x100 Reset (write 1)    clears sketch, hot bits, hot page buffer,
//                            state totals and histogram
//   0x200 SetThreshold       theta (low COUNTER_BITS bits of the write data)
//   0x300 GetNrHotPage       number of hot pages in the buffer
//   0x400 GetHotPage         removes and returns the oldest hot page;
//                            all ones if the buffer is empty
//   0x500/0x600/0x700        sampled cycles / read cycles / write cycles
//   0x800 SetHistEn (write 1) starts the histogram of sketch lane 0
//   0x900 GetNrHistBin       number of bins, 0 until the histogram is done
//   0xA00 GetHist            next bin count (bin 0 first), 0 if not done
// The command set and offsets follow the profiler description. This design's
// choices: the register interface (one-cycle write, read data one cycle
// after mmio_rd), 64-bit data, theta reset to its maximum (nothing is hot
// until the host sets it), the empty marker and the Reset leaving theta.
//
// Lint note: rst_n is both the asynchronous reset of the registers and the
// 'disable iff' term of the one-command-per-cycle assertion, so a linter may
// report it as used synchronously and asynchronously. The assertion is
// simulation-only checking and adds no logic; the warning stands.
module neoprof_core
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
  parameter int unsigned HSTAGES     = HASH_STAGES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // Page Addr FIFO (read side)
  input  logic                      page_empty,
  input  logic [PAGE_W-1:0]         page_data,
  output logic                      page_pop,
  // State FIFO (read side)
  input  logic                      st_empty,
  input  state_sample_t             st_data,
  output logic                      st_pop,
  // MMIO command port
  input  logic                      mmio_wr,
  input  logic                      mmio_rd,
  input  logic [MMIO_ADDR_BITS-1:0] mmio_addr,
  input  logic [MMIO_DATA_BITS-1:0] mmio_wdata,
  output logic [MMIO_DATA_BITS-1:0] mmio_rdata,
  output logic                      mmio_rvalid
);
  localparam int unsigned IDX_W = $clog2(W);
  localparam int unsigned HB_W  = $clog2(HOT_ENTRIES + 1);
  localparam int unsigned BIN_W = $clog2(W + 1);

  logic [CNT_W-1:0] threshold;
  logic             soft_clear, hist_start;
  logic [63:0]      tot_cycles, tot_rd, tot_wr;

  // detector
  logic              det_new, det_dup;
  logic [PAGE_W-1:0] det_page;
  logic              scan_en, scan_rvalid, scan_entry_valid;
  logic [IDX_W-1:0]  scan_idx;
  logic [CNT_W-1:0]  scan_count;

  // hot page buffer
  logic              hb_pop, hb_empty, hb_full;
  logic [PAGE_W-1:0] hb_rdata;
  logic [HB_W-1:0]   hb_count;
  logic [31:0]       hb_overflows;

  // histogram
  logic              hist_busy, hist_done, hist_pop;
  logic [BIN_W-1:0]  hist_rdata;

  assign page_pop = !page_empty;
  assign st_pop   = !st_empty;

  hot_page_detector #(
    .W(W), .D(D), .K(K), .HOT_K(K), .CNT_W(CNT_W), .PAGE_W(PAGE_W), .HSTAGES(HSTAGES)
  ) u_det (
    .clk, .rst_n, .clear(soft_clear), .threshold,
    .in_valid(page_pop), .in_page(page_data),
    .out_new(det_new), .out_dup(det_dup), .out_page(det_page),
    .scan_en, .scan_idx, .scan_rvalid, .scan_entry_valid, .scan_count
  );

  hot_page_buffer #(.DEPTH(HOT_ENTRIES), .DW(PAGE_W)) u_hbuf (
    .clk, .rst_n, .clear(soft_clear),
    .push(det_new), .push_data(det_page),
    .pop(hb_pop), .rd_data(hb_rdata), .count(hb_count),
    .empty(hb_empty), .full(hb_full), .overflows(hb_overflows)
  );

  histogram_unit #(.W(W), .CNT_W(CNT_W), .BINS(BINS), .BIN_SHIFT(BIN_SHIFT)) u_hist (
    .clk, .rst_n, .clear(soft_clear), .start(hist_start),
    .busy(hist_busy), .done(hist_done),
    .scan_en, .scan_idx, .scan_rvalid, .scan_entry_valid, .scan_count,
    .rd_pop(hist_pop), .rd_data(hist_rdata)
  );

  // ------------------------------------------------------------- writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      threshold  <= '1;
      soft_clear <= 1'b0;
      hist_start <= 1'b0;
    end else begin
      soft_clear <= mmio_wr && (mmio_addr == CMD_RESET)       && mmio_wdata[0];
      hist_start <= mmio_wr && (mmio_addr == CMD_SET_HIST_EN) && mmio_wdata[0];
      if (mmio_wr && (mmio_addr == CMD_SET_THRESHOLD)) threshold <= mmio_wdata[CNT_W-1:0];
    end
  end

  // ------------------------------------------------------- state totals
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tot_cycles <= '0; tot_rd <= '0; tot_wr <= '0;
    end else if (soft_clear) begin
      tot_cycles <= '0; tot_rd <= '0; tot_wr <= '0;
    end else if (st_pop) begin
      tot_cycles <= tot_cycles + 64'(st_data.cycles);
      tot_rd     <= tot_rd     + 64'(st_data.rd);
      tot_wr     <= tot_wr     + 64'(st_data.wr);
    end
  end

  // -------------------------------------------------------------- reads
  typedef enum logic [1:0] {RD_REG, RD_HOTPAGE, RD_HIST} rsel_e;
  rsel_e                     rsel_q;
  logic                      hb_was_empty_q, hist_ok_q;
  logic [MMIO_DATA_BITS-1:0] reg_q;

  assign hb_pop   = mmio_rd && (mmio_addr == CMD_GET_HOTPAGE) && !hb_empty;
  assign hist_pop = mmio_rd && (mmio_addr == CMD_GET_HIST) && hist_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rvalid    <= 1'b0;
      rsel_q         <= RD_REG;
      hb_was_empty_q <= 1'b1;
      hist_ok_q      <= 1'b0;
      reg_q          <= '0;
    end else begin
      mmio_rvalid <= mmio_rd;
      if (mmio_rd) begin
        rsel_q         <= RD_REG;
        hb_was_empty_q <= hb_empty;
        hist_ok_q      <= hist_done;
        reg_q          <= '0;
        unique case (mmio_addr)
          CMD_SET_THRESHOLD:  reg_q <= MMIO_DATA_BITS'(threshold);
          CMD_GET_NR_HOTPAGE: reg_q <= MMIO_DATA_BITS'(hb_count);
          CMD_GET_HOTPAGE:    rsel_q <= RD_HOTPAGE;
          CMD_GET_NR_SAMPLE:  reg_q <= tot_cycles;
          CMD_GET_RD_CNT:     reg_q <= tot_rd;
          CMD_GET_WR_CNT:     reg_q <= tot_wr;
          CMD_GET_NR_HISTBIN: reg_q <= hist_done ? MMIO_DATA_BITS'(BINS) : '0;
          CMD_GET_HIST:       rsel_q <= RD_HIST;
          default:            reg_q <= '0;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rsel_q)
      RD_HOTPAGE: mmio_rdata = hb_was_empty_q ? HOTPAGE_EMPTY : MMIO_DATA_BITS'(hb_rdata);
      RD_HIST:    mmio_rdata = hist_ok_q ? MMIO_DATA_BITS'(hist_rdata) : '0;
      default:    mmio_rdata = reg_q;
    endcase
  end

  // one command per cycle: a read and a write may not coincide
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) !(mmio_wr && mmio_rd))
    else $error("neoprof_core: MMIO read and write in the same cycle");
endmodule
