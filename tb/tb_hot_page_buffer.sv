// tb_hot_page_buffer: random pushes and pops against a queue model, with
// the buffer driven full so that overflow drops are counted, simultaneous
// push and pop when full, pops on empty, and clear.
module tb_hot_page_buffer;
  localparam int unsigned DEPTH = 16, DW = 32, CNT_W = 5;
  logic clk = 0, rst_n = 0, clear = 0;
  logic push = 0, pop = 0; logic [DW-1:0] push_data = 0, rd_data;
  logic [CNT_W-1:0] count; logic empty, full; logic [31:0] overflows;
  int checks = 0, failures = 0, model_ovf = 0, fulls = 0;

  hot_page_buffer #(.DEPTH(DEPTH), .DW(DW), .CNT_W(CNT_W)) dut (.*);
  always #5 clk = ~clk;

  logic [DW-1:0] q [$];

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      bit pu, po, did_pop; logic [DW-1:0] exp;
      int phase; phase = (i / 300) % 3;   // 0: mostly push, 1: balanced, 2: mostly pop
      @(negedge clk);
      pu = (phase == 0) ? ($urandom_range(0, 9) < 8) : (phase == 1) ? $urandom_range(0, 1) : ($urandom_range(0, 9) < 2);
      po = (phase == 0) ? ($urandom_range(0, 9) < 2) : (phase == 1) ? $urandom_range(0, 1) : ($urandom_range(0, 9) < 8);
      push = pu; pop = po; push_data = $urandom;
      checks++;
      if (count != CNT_W'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("FAIL count=%0d exp=%0d", count, q.size());
      end
      if (full) fulls++;
      did_pop = po && q.size() > 0;
      if (did_pop) exp = q.pop_front();
      if (pu) begin
        if (q.size() < DEPTH) q.push_back(push_data); else model_ovf++;
      end
      @(posedge clk); #1;
      if (did_pop) begin
        checks++;
        if (rd_data != exp) begin failures++; $display("FAIL rd=%h exp=%h", rd_data, exp); end
      end
    end
    @(negedge clk); push = 0; pop = 0;
    checks++; if (overflows != 32'(model_ovf) || model_ovf == 0 || fulls == 0) begin failures++; $display("FAIL ovf %0d %0d", overflows, model_ovf); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; q.delete();
    checks++; if (!empty || count != 0 || overflows != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
