// histogram_unit: histogram of the first sketch row, for error-bound and
// access-frequency estimation by the host.
//
// 'start' (the SetHistEn command) clears the BINS bin counters and then reads
// every one of the W counters of sketch lane 0 through its scan port, one
// per cycle. Each valid entry adds one to bin min(count >> BIN_SHIFT,
// BINS-1); entries not touched in this period are skipped. When the last
// read has returned, 'done' is set. The host then reads the bins in order,
// one per rd_pop (the "frequency FIFO"): bin 0 first, wrapping after bin
// BINS-1, and computes the p-percentile itself. A new start or 'clear' ends
// the previous result. Sixty-four bins and reading the first row follow the
// profiler description; the linear bin width of 2^BIN_SHIFT, skipping
// untouched entries and the read-out order are this design's choices.
//
// Timing: done is set W+3 clock cycles after the cycle in which start is
// asserted (W scan reads, plus the start, read-latency and drain cycles).
// rd_data is valid in the cycle after rd_pop.
module histogram_unit
  import neoprof_pkg::*;
#(
  parameter int unsigned W         = SKETCH_WIDTH,
  parameter int unsigned CNT_W     = COUNTER_BITS,
  parameter int unsigned BINS      = HIST_BINS,
  parameter int unsigned BIN_SHIFT = HIST_BIN_SHIFT,
  parameter int unsigned IDX_W     = $clog2(W),
  parameter int unsigned BIN_W     = $clog2(W + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // scan port of sketch lane 0
  output logic             scan_en,
  output logic [IDX_W-1:0] scan_idx,
  input  logic             scan_rvalid,
  input  logic             scan_entry_valid,
  input  logic [CNT_W-1:0] scan_count,
  // read-out
  input  logic             rd_pop,
  output logic [BIN_W-1:0] rd_data
);
  localparam int unsigned BI_W = $clog2(BINS);

  typedef enum logic [1:0] {H_IDLE, H_SCAN, H_DRAIN, H_DONE} hstate_e;
  hstate_e state;

  logic [BIN_W-1:0] bin_cnt [BINS];
  logic [BI_W-1:0]  rd_ptr;
  logic [BI_W-1:0]  bin_of;

  always_comb begin
    if ((scan_count >> BIN_SHIFT) >= CNT_W'(BINS - 1)) bin_of = BI_W'(BINS - 1);
    else                                               bin_of = BI_W'(scan_count >> BIN_SHIFT);
  end

  assign busy    = (state == H_SCAN) || (state == H_DRAIN);
  assign done    = (state == H_DONE);
  assign scan_en = (state == H_SCAN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= H_IDLE;
      scan_idx <= '0;
      rd_ptr   <= '0;
      rd_data  <= '0;
      for (int unsigned b = 0; b < BINS; b++) bin_cnt[b] <= '0;
    end else if (clear || start) begin
      state    <= clear ? H_IDLE : H_SCAN;
      scan_idx <= '0;
      rd_ptr   <= '0;
      for (int unsigned b = 0; b < BINS; b++) bin_cnt[b] <= '0;
    end else begin
      if (scan_rvalid && scan_entry_valid) bin_cnt[bin_of] <= bin_cnt[bin_of] + 1'b1;
      unique case (state)
        H_SCAN:  begin
          scan_idx <= scan_idx + 1'b1;
          if (scan_idx == IDX_W'(W - 1)) state <= H_DRAIN;
        end
        H_DRAIN: if (!scan_rvalid) state <= H_DONE;
        default: ;
      endcase
      if (rd_pop) begin
        rd_data <= bin_cnt[rd_ptr];
        rd_ptr  <= (rd_ptr == BI_W'(BINS - 1)) ? '0 : rd_ptr + 1'b1;
      end
    end
  end
endmodule
