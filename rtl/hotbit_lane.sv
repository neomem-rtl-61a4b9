// hotbit_lane: one row of the hot-bit array used by the hot page filter.
//
// Every sketch entry has a Hot bit. It is kept in its own array, segmented
// and pipelined like the counters (sketch_lane): a request walks through K
// segments; in the segment owning its index it reads the old hot bit and,
// if the page was found hot (in_set), sets the bit in the same cycle. The old
// bit travels on to the filter. The filter's rule, "if any hot bit is clear,
// set all of them", is realised by setting the bits of every hot page: a bit
// that is already set stays set, so the outcome is the same and no second
// pass over the lanes is needed. 'clear' resets all hot bits in one cycle, as
// the valid bits of the counters are.
//
// Follows the profiler description (hot bit per entry, pipelined hot-bit
// array, cleared with the counters). This design's choices: a separate flat
// bit vector per segment, unconditional set for hot pages.
//
// Timing: out_* appear K+1 cycles after in_*; no back-pressure.
module hotbit_lane
  import neoprof_pkg::*;
#(
  parameter int unsigned W      = SKETCH_WIDTH,
  parameter int unsigned K      = SKETCH_SEGMENTS,
  parameter int unsigned TAG_W  = PAGE_ADDR_BITS,
  parameter int unsigned IDX_W  = $clog2(W)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  input  logic             in_set,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic             out_set,
  output logic             out_old,
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned S     = W / K;
  localparam int unsigned OFF_W = $clog2(S);
  localparam int unsigned SEG_W = (K > 1) ? $clog2(K) : 1;

  typedef struct packed {
    logic             valid;
    logic             set;
    logic [IDX_W-1:0] idx;
    logic [TAG_W-1:0] tag;
    logic             old;
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
      p[0].set   <= in_set;
      p[0].idx   <= in_idx;
      p[0].tag   <= in_tag;
      p[0].old   <= 1'b0;
    end
  end

  for (genvar k = 0; k < K; k++) begin : g_seg
    logic [S-1:0]     hbits;
    logic             hit;
    logic [OFF_W-1:0] off;

    assign off = p[k].idx[OFF_W-1:0];
    assign hit = p[k].valid && (seg_of(p[k].idx) == SEG_W'(k));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) hbits <= '0;
      else begin
        if (clear) hbits <= '0;
        if (hit && p[k].set) hbits[off] <= 1'b1;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) p[k+1] <= '0;
      else begin
        p[k+1] <= p[k];
        if (hit) p[k+1].old <= hbits[off] && !clear;
      end
    end
  end

  assign out_valid = p[K].valid;
  assign out_set   = p[K].set;
  assign out_old   = p[K].old;
  assign out_tag   = p[K].tag;
endmodule
