// tb_state_monitor: random read and write data beats with the FIFO
// sometimes full; the sum of all sent samples must equal the cycles and
// beats counted by the testbench, each window must be WINDOW cycles unless
// extended by a full FIFO, and no cycle may be lost.
module tb_state_monitor;
  import neoprof_pkg::*;
  localparam int unsigned WINDOW = 32;
  logic clk = 0, rst_n = 0;
  logic rd_beat = 0, wr_beat = 0, fifo_push, fifo_full = 0;
  state_sample_t fifo_data;
  int checks = 0, failures = 0, extended = 0;
  longint cyc = 0, rd = 0, wr = 0, s_cyc = 0, s_rd = 0, s_wr = 0;

  state_monitor #(.WINDOW(WINDOW)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++; rd += rd_beat; wr += wr_beat;
    if (fifo_push) begin
      s_cyc += fifo_data.cycles; s_rd += fifo_data.rd; s_wr += fifo_data.wr;
      checks++;
      if (fifo_data.cycles < WINDOW || fifo_data.rd > fifo_data.cycles || fifo_data.wr > fifo_data.cycles) failures++;
      if (fifo_data.cycles > WINDOW) extended++;
    end
  end

  always @(negedge clk) begin
    rd_beat   <= $urandom_range(0, 2) == 0;
    wr_beat   <= $urandom_range(0, 3) == 0;
    fifo_full <= ($urandom_range(0, 9) == 0);
  end

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5000) @(posedge clk);
    @(negedge clk);
    // what is still in the accumulator has not been sent yet
    checks++;
    if (s_cyc + dut.acc.cycles != cyc || s_rd + dut.acc.rd != rd || s_wr + dut.acc.wr != wr) begin
      failures++; $display("FAIL totals cyc %0d+%0d/%0d rd %0d+%0d/%0d", s_cyc, dut.acc.cycles, cyc, s_rd, dut.acc.rd, rd);
    end
    checks++; if (extended == 0) begin failures++; $display("no window extended"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
