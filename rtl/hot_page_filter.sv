// hot_page_filter: drops hot pages that were already reported.
//
// A page found hot is new if at least one of the D hot bits of its hashed
// entries was clear before this access: the inverted old hot bits are ORed
// (the inverters and OR gate of the filter). Only a new hot page is passed
// on to the hot page buffer; a hot page whose bits were all set is counted
// as a duplicate and dismissed, like a Bloom filter lookup that hits.
//
// Timing: one register stage; out_new/out_dup pulse one cycle after in_valid.
module hot_page_filter
  import neoprof_pkg::*;
#(
  parameter int unsigned D     = SKETCH_LANES,
  parameter int unsigned TAG_W = PAGE_ADDR_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_hot,
  input  logic [D-1:0]     in_old_bits,
  input  logic [TAG_W-1:0] in_page,
  output logic             out_new,   // new hot page, push to buffer
  output logic             out_dup,   // hot page filtered as already seen
  output logic [TAG_W-1:0] out_page
);
  logic any_clear;
  assign any_clear = |(~in_old_bits);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_new  <= 1'b0;
      out_dup  <= 1'b0;
      out_page <= '0;
    end else begin
      out_new  <= in_valid && in_hot && any_clear;
      out_dup  <= in_valid && in_hot && !any_clear;
      out_page <= in_page;
    end
  end
endmodule
