// tb_page_monitor: random request addresses; checks that each becomes its
// 4KB page number one cycle later, and that requests arriving while the
// FIFO is full are dropped and counted.
module tb_page_monitor;
  localparam int unsigned ADDR_W = 44, SHIFT = 12, PAGE_W = 32;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0; logic [ADDR_W-1:0] req_addr = 0;
  logic fifo_push; logic [PAGE_W-1:0] fifo_page; logic fifo_full = 0; logic [31:0] drops;
  int checks = 0, failures = 0, exp_drops = 0;

  page_monitor #(.ADDR_W(ADDR_W), .SHIFT(SHIFT), .PAGE_W(PAGE_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      bit v, f; logic [ADDR_W-1:0] a;
      v = $urandom_range(0, 3) != 0; a = {$urandom, $urandom}; f = (i > 250) && ($urandom_range(0, 2) == 0);
      @(negedge clk); req_valid = v; req_addr = a;
      @(negedge clk); req_valid = 0; fifo_full = f;
      #1;
      checks++;
      if (fifo_push != (v && !f) || (v && fifo_page != a[ADDR_W-1:SHIFT])) begin
        failures++; $display("FAIL push=%0d page=%h addr=%h", fifo_push, fifo_page, a);
      end
      if (v && f) exp_drops++;
      @(negedge clk); fifo_full = 0;
    end
    checks++; if (drops != 32'(exp_drops) || exp_drops == 0) begin failures++; $display("FAIL drops %0d exp %0d", drops, exp_drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
