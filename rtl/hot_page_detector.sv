// hot_page_detector: Count-Min sketch hot page detector with hot page filter.
//
// Pipeline for one page address per cycle, in three parts:
//   1. hash: D pipelined H3 hash units give the page's entry index in each
//      of the D sketch lanes (HSTAGES cycles);
//   2. count and check: the D sketch lanes (segmented, pipelined arrays)
//      increment the hashed counters (K+1 cycles), then the hot page checker
//      takes the minimum of the D new counts and flags the page hot if it
//      exceeds theta (1 cycle);
//   3. filter: the D hot-bit lanes return the old hot bits of the hashed
//      entries and set them for a hot page (HOT_K+1 cycles), and the filter
//      passes the page on only if one of those bits was clear (1 cycle).
// All lanes run in lock step, so their results line up without handshakes.
// 'clear' empties the sketch and hot-bit arrays in one cycle. The scan port
// of lane 0 is brought out for the histogram unit.
//
// The structure (H3 hashing, D x W counter/valid/hot entries, K pipelined
// memory segments, min > theta check, hot-bit filter) follows the profiler
// description; stage counts inside each part are this design's choice.
//
// Timing: out_new / out_dup pulse LATENCY cycles after in_valid.
module hot_page_detector
  import neoprof_pkg::*;
#(
  parameter int unsigned W       = SKETCH_WIDTH,
  parameter int unsigned D       = SKETCH_LANES,
  parameter int unsigned K       = SKETCH_SEGMENTS,
  parameter int unsigned HOT_K   = SKETCH_SEGMENTS,
  parameter int unsigned CNT_W   = COUNTER_BITS,
  parameter int unsigned PAGE_W  = PAGE_ADDR_BITS,
  parameter int unsigned HSTAGES = HASH_STAGES,
  parameter int unsigned IDX_W   = $clog2(W),
  parameter int unsigned LATENCY = HSTAGES + (K + 1) + 1 + (HOT_K + 1) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [CNT_W-1:0]  threshold,
  input  logic              in_valid,
  input  logic [PAGE_W-1:0] in_page,
  output logic              out_new,
  output logic              out_dup,
  output logic [PAGE_W-1:0] out_page,
  // lane 0 scan port (histogram)
  input  logic              scan_en,
  input  logic [IDX_W-1:0]  scan_idx,
  output logic              scan_rvalid,
  output logic              scan_entry_valid,
  output logic [CNT_W-1:0]  scan_count
);
  // stage 1 results
  logic              h_valid [D];
  logic [PAGE_W-1:0] h_page  [D];
  logic [IDX_W-1:0]  h_idx   [D];
  // stage 2 results
  logic              s_valid [D];
  logic [PAGE_W-1:0] s_page  [D];
  logic [IDX_W-1:0]  s_idx   [D];
  logic [CNT_W-1:0]  s_count [D];
  logic [IDX_W-1:0]  c_idx   [D];
  logic              c_valid, c_hot;
  logic [CNT_W-1:0]  c_min;
  logic [PAGE_W-1:0] c_page;
  // stage 3 results
  logic              b_valid [D];
  logic              b_set   [D];
  logic [PAGE_W-1:0] b_page  [D];
  logic [D-1:0]      b_old;

  logic [D-1:0]      lane_scan_rvalid, lane_scan_entry_valid;
  logic [CNT_W-1:0]  lane_scan_count [D];

  for (genvar d = 0; d < D; d++) begin : g_lane
    h3_hash #(.N(PAGE_W), .M(IDX_W), .STAGES(HSTAGES), .SEED_KEY(d)) u_hash (
      .clk, .rst_n,
      .in_valid (in_valid), .in_x (in_page),
      .out_valid(h_valid[d]), .out_x(h_page[d]), .out_hash(h_idx[d])
    );

    // only lane 0 is scanned by the histogram unit
    sketch_lane #(.W(W), .K(K), .CNT_W(CNT_W), .TAG_W(PAGE_W), .IDX_W(IDX_W)) u_sketch (
      .clk, .rst_n, .clear,
      .in_valid (h_valid[d]), .in_idx(h_idx[d]), .in_tag(h_page[d]),
      .out_valid(s_valid[d]), .out_idx(s_idx[d]), .out_tag(s_page[d]), .out_count(s_count[d]),
      .scan_en  (scan_en && (d == 0)), .scan_idx(scan_idx),
      .scan_rvalid(lane_scan_rvalid[d]), .scan_entry_valid(lane_scan_entry_valid[d]),
      .scan_count(lane_scan_count[d])
    );

    // index follows the checker's register stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) c_idx[d] <= '0;
      else        c_idx[d] <= s_idx[d];
    end

    hotbit_lane #(.W(W), .K(HOT_K), .TAG_W(PAGE_W), .IDX_W(IDX_W)) u_hot (
      .clk, .rst_n, .clear,
      .in_valid (c_valid), .in_set(c_hot), .in_idx(c_idx[d]), .in_tag(c_page),
      .out_valid(b_valid[d]), .out_set(b_set[d]), .out_old(b_old[d]), .out_tag(b_page[d])
    );
  end

  hot_page_checker #(.D(D), .CNT_W(CNT_W), .TAG_W(PAGE_W)) u_check (
    .clk, .rst_n,
    .in_valid (s_valid[0]), .in_counts(s_count), .in_tag(s_page[0]), .threshold,
    .out_valid(c_valid), .out_hot(c_hot), .out_min(c_min), .out_tag(c_page)
  );

  hot_page_filter #(.D(D), .TAG_W(PAGE_W)) u_filter (
    .clk, .rst_n,
    .in_valid(b_valid[0]), .in_hot(b_set[0]), .in_old_bits(b_old), .in_page(b_page[0]),
    .out_new, .out_dup, .out_page
  );

  assign scan_rvalid      = lane_scan_rvalid[0];
  assign scan_entry_valid = lane_scan_entry_valid[0];
  assign scan_count       = lane_scan_count[0];
endmodule
