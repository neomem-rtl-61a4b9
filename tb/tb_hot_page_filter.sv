// tb_hot_page_filter: all combinations of hot flag and old hot bits, plus
// random ones: a page is new only if hot and some old bit is clear, a
// duplicate if hot and all old bits are set.
module tb_hot_page_filter;
  localparam int unsigned D = 2, TAG_W = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_hot; logic [D-1:0] in_old_bits; logic [TAG_W-1:0] in_page;
  logic out_new, out_dup; logic [TAG_W-1:0] out_page;
  int checks = 0, failures = 0;

  hot_page_filter #(.D(D), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_hot = 0; in_old_bits = 0; in_page = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      bit v, h; logic [D-1:0] o; bit en, ed;
      if (i < 16) begin v = i[3]; h = i[2]; o = i[1:0]; end
      else begin v = $urandom_range(0, 1); h = $urandom_range(0, 1); o = D'($urandom); end
      @(negedge clk);
      in_valid = v; in_hot = h; in_old_bits = o; in_page = $urandom;
      en = v && h && (o != '1);
      ed = v && h && (o == '1);
      @(posedge clk); #1;
      checks++;
      if (out_new != en || out_dup != ed || (en && out_page != in_page)) begin
        failures++; $display("FAIL v=%0d h=%0d old=%b new=%0d dup=%0d", v, h, o, out_new, out_dup);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
