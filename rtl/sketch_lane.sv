// sketch_lane: one row (lane) of the Count-Min sketch array.
//
// W entries, each a COUNTER_BITS counter plus a valid bit, are split into K
// memory segments of W/K entries. The segments are chained as pipeline
// stages: a request (hashed index) enters stage 0 and moves one segment per
// cycle; in the segment that owns its index it reads the entry, adds one and
// writes it back in the same cycle, and carries the new count onward. Since
// every request visits the segments in order, two requests to one entry can
// never overtake each other, so no forwarding is needed. An entry whose valid
// bit is clear reads as zero. 'clear' resets every valid bit in one cycle
// (the valid bits are kept as one flat vector per segment), which empties the
// sketch at the end of a detection period.
//
// A second read port (scan_*) lets the histogram unit read any entry; it
// returns {entry valid, count} one cycle after scan_en.
//
// Follows the profiler description: counter/valid entries, segmented
// pipelined array, valid-bit clearing. This design's choices: one-cycle
// read-modify-write per segment (a register-file style memory), counters
// saturate at their maximum, an access in the clear cycle starts the new
// period.
//
// Timing: out_* appear K+1 cycles after in_* (one input register plus K
// segment stages). No back-pressure: one request per cycle.
module sketch_lane
  import neoprof_pkg::*;
#(
  parameter int unsigned W      = SKETCH_WIDTH,
  parameter int unsigned K      = SKETCH_SEGMENTS,
  parameter int unsigned CNT_W  = COUNTER_BITS,
  parameter int unsigned TAG_W  = PAGE_ADDR_BITS,
  parameter int unsigned IDX_W  = $clog2(W)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  // update pipeline
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output logic [TAG_W-1:0] out_tag,
  output logic [CNT_W-1:0] out_count,
  // scan read port
  input  logic             scan_en,
  input  logic [IDX_W-1:0] scan_idx,
  output logic             scan_rvalid,
  output logic             scan_entry_valid,
  output logic [CNT_W-1:0] scan_count
);
  localparam int unsigned S     = W / K;          // entries per segment
  localparam int unsigned OFF_W = $clog2(S);
  localparam int unsigned SEG_W = (K > 1) ? $clog2(K) : 1;

  typedef struct packed {
    logic             valid;
    logic [IDX_W-1:0] idx;
    logic [TAG_W-1:0] tag;
    logic [CNT_W-1:0] count;
  } req_t;

  req_t p [K+1];

  function automatic logic [SEG_W-1:0] seg_of(input logic [IDX_W-1:0] i);
    if (K > 1) return SEG_W'(i >> OFF_W);
    else       return '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p[0] <= '0;
    else begin
      p[0].valid <= in_valid;
      p[0].idx   <= in_idx;
      p[0].tag   <= in_tag;
      p[0].count <= '0;
    end
  end

  logic [CNT_W:0] seg_rd [K];    // {valid, count} seen by the scan port

  logic [SEG_W-1:0] scan_seg;
  logic [OFF_W-1:0] scan_off;
  assign scan_seg = seg_of(scan_idx);
  assign scan_off = scan_idx[OFF_W-1:0];

  for (genvar k = 0; k < K; k++) begin : g_seg
    logic [CNT_W-1:0] mem [S];
    logic [S-1:0]     vbits;
    logic             hit;
    logic [OFF_W-1:0] off;
    logic [CNT_W-1:0] old_cnt, new_cnt;

    assign off     = p[k].idx[OFF_W-1:0];
    assign hit     = p[k].valid && (seg_of(p[k].idx) == SEG_W'(k));
    assign old_cnt = (vbits[off] && !clear) ? mem[off] : '0;
    assign new_cnt = (&old_cnt) ? old_cnt : old_cnt + 1'b1;

    always_ff @(posedge clk) begin
      if (hit) mem[off] <= new_cnt;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vbits <= '0;
      else begin
        if (clear) vbits <= '0;
        if (hit)   vbits[off] <= 1'b1;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) p[k+1] <= '0;
      else begin
        p[k+1]       <= p[k];
        if (hit) p[k+1].count <= new_cnt;
      end
    end

    assign seg_rd[k] = vbits[scan_off] ? {1'b1, mem[scan_off]} : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_rvalid      <= 1'b0;
      scan_entry_valid <= 1'b0;
      scan_count       <= '0;
    end else begin
      scan_rvalid <= scan_en;
      if (scan_en) {scan_entry_valid, scan_count} <= seg_rd[scan_seg];
    end
  end

  assign out_valid = p[K].valid;
  assign out_idx   = p[K].idx;
  assign out_tag   = p[K].tag;
  assign out_count = p[K].count;
endmodule
