// tb_histogram_unit: a small array of random counters (some entries
// invalid, some above the last bin) answers the scan port with one-cycle
// latency, like a sketch lane. The testbench checks every bin against its
// own count, the W+3 cycle scan time, the done flag, read-out order with
// wrap-around, restart and clear.
module tb_histogram_unit;
  localparam int unsigned W = 512, CNT_W = 16, BINS = 64, BIN_SHIFT = 4, IDX_W = 9, BIN_W = 10;
  logic clk = 0, rst_n = 0, clear = 0, start = 0;
  logic busy, done, scan_en; logic [IDX_W-1:0] scan_idx;
  logic scan_rvalid = 0, scan_entry_valid = 0; logic [CNT_W-1:0] scan_count = 0;
  logic rd_pop = 0; logic [BIN_W-1:0] rd_data;
  int checks = 0, failures = 0;

  histogram_unit #(.W(W), .CNT_W(CNT_W), .BINS(BINS), .BIN_SHIFT(BIN_SHIFT), .IDX_W(IDX_W), .BIN_W(BIN_W)) dut (.*);
  always #5 clk = ~clk;

  int cnt [W]; bit vld [W]; int expbin [BINS];

  always @(posedge clk) begin
    scan_rvalid <= scan_en;
    if (scan_en) begin scan_entry_valid <= vld[scan_idx]; scan_count <= CNT_W'(cnt[scan_idx]); end
  end

  task automatic fill_and_expect();
    foreach (expbin[b]) expbin[b] = 0;
    for (int i = 0; i < W; i++) begin
      int r; r = $urandom_range(0, 9);
      vld[i] = (r != 0);
      cnt[i] = (r == 1) ? $urandom_range(1024, 65535) : $urandom_range(1, 1100);
      if (vld[i]) expbin[((cnt[i] >> BIN_SHIFT) > BINS - 1) ? BINS - 1 : (cnt[i] >> BIN_SHIFT)]++;
    end
  endtask

  task automatic run_and_check(input int first_bin_reads);
    int t0, t1;
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != W + 3) begin failures++; $display("FAIL scan took %0d cycles", (t1 - t0) / 10); end
    for (int b = 0; b < BINS + first_bin_reads; b++) begin
      @(negedge clk); rd_pop = 1; @(negedge clk); rd_pop = 0;
      checks++;
      if (rd_data != BIN_W'(expbin[b % BINS])) begin failures++; $display("FAIL bin %0d = %0d exp %0d", b, rd_data, expbin[b % BINS]); end
    end
  endtask

  initial begin
    #400000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (done || busy) failures++;
    fill_and_expect();
    run_and_check(3);          // reads wrap around after the last bin
    fill_and_expect();
    run_and_check(0);          // restart clears the previous bins
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (done || busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
