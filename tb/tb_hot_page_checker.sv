// tb_hot_page_checker: random counter pairs and thresholds, including the
// equal-to-theta boundary; checks the minimum, the strict "greater than"
// hot rule and the one-cycle latency.
module tb_hot_page_checker;
  localparam int unsigned D = 2, CNT_W = 16, TAG_W = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic [CNT_W-1:0] in_counts [D]; logic [TAG_W-1:0] in_tag; logic [CNT_W-1:0] threshold;
  logic out_valid, out_hot; logic [CNT_W-1:0] out_min; logic [TAG_W-1:0] out_tag;
  int checks = 0, failures = 0, hots = 0, colds = 0;

  hot_page_checker #(.D(D), .CNT_W(CNT_W), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_tag = 0; threshold = 0; in_counts[0] = 0; in_counts[1] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      int a, b, t, m;
      @(negedge clk);
      a = $urandom_range(0, 400); b = $urandom_range(0, 400); t = $urandom_range(0, 400);
      if (i % 7 == 0) t = (a < b) ? a : b;           // boundary: min == theta is not hot
      if (i % 11 == 0) begin a = 16'hFFFF; b = 16'hFFFF; t = 16'hFFFE; end
      in_valid = 1; in_counts[0] = CNT_W'(a); in_counts[1] = CNT_W'(b);
      threshold = CNT_W'(t); in_tag = TAG_W'(i);
      m = (a < b) ? a : b;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_min != CNT_W'(m) || out_hot != (m > t) || out_tag != TAG_W'(i)) begin
        failures++; $display("FAIL a=%0d b=%0d t=%0d min=%0d hot=%0d", a, b, t, out_min, out_hot);
      end
      if (m > t) hots++; else colds++;
    end
    @(negedge clk); in_valid = 0; @(posedge clk); #1;
    checks++; if (out_valid || out_hot) failures++;
    checks++; if (hots == 0 || colds == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
