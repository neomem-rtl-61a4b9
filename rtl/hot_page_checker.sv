// hot_page_checker: the hot page check of the detector pipeline.
//
// Takes the D counter values a page reached in the D sketch lanes, forms
// their minimum (the Count-Min estimate of the page's access count) and flags
// the page hot when that minimum is strictly greater than the threshold
// theta. Both rules (minimum over lanes, hot if estimate > theta) follow the
// profiler description; the single register stage is this design's choice.
//
// Timing: one cycle from in_valid to out_valid; out_tag is in_tag delayed.
module hot_page_checker
  import neoprof_pkg::*;
#(
  parameter int unsigned D     = SKETCH_LANES,
  parameter int unsigned CNT_W = COUNTER_BITS,
  parameter int unsigned TAG_W = PAGE_ADDR_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [CNT_W-1:0] in_counts [D],
  input  logic [TAG_W-1:0] in_tag,
  input  logic [CNT_W-1:0] threshold,
  output logic             out_valid,
  output logic             out_hot,
  output logic [CNT_W-1:0] out_min,
  output logic [TAG_W-1:0] out_tag
);
  logic [CNT_W-1:0] min_c;

  always_comb begin
    min_c = in_counts[0];
    for (int unsigned i = 1; i < D; i++)
      if (in_counts[i] < min_c) min_c = in_counts[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hot   <= 1'b0;
      out_min   <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_hot   <= in_valid && (min_c > threshold);
      out_min   <= min_c;
      out_tag   <= in_tag;
    end
  end
endmodule
