// tb_neoprof_core: the testbench plays both FIFOs and the host. Page
// addresses are offered on the Page Addr side, state samples on the State
// side, and every command of the map is exercised: SetThreshold (read back),
// GetNrHotPage and GetHotPage against the reference sketch, GetNrSample /
// GetRdCnt / GetWrCnt against the sum of the offered samples, SetHistEn,
// GetNrHistBin (0 while busy) and GetHist against the model's bins, the
// empty marker, and Reset.
module tb_neoprof_core;
  import neoprof_pkg::*;
  localparam int unsigned W = 1024, D = 2, K = 8, CNT_W = 10, PAGE_W = 20, HOT_ENTRIES = 32,
                          BINS = 64, BIN_SHIFT = 2, HSTAGES = 2;

  logic clk = 0, rst_n = 0;
  logic page_empty = 1, page_pop; logic [PAGE_W-1:0] page_data = 0;
  logic st_empty = 1, st_pop; state_sample_t st_data = '0;
  logic mmio_wr = 0, mmio_rd = 0; logic [MMIO_ADDR_BITS-1:0] mmio_addr = 0;
  logic [MMIO_DATA_BITS-1:0] mmio_wdata = 0, mmio_rdata; logic mmio_rvalid;
  int checks = 0, failures = 0;

  neoprof_core #(.W(W), .D(D), .K(K), .CNT_W(CNT_W), .PAGE_W(PAGE_W), .HOT_ENTRIES(HOT_ENTRIES),
                 .BINS(BINS), .BIN_SHIFT(BIN_SHIFT), .HSTAGES(HSTAGES)) dut (.*);
  always #5 clk = ~clk;

  `include "neoprof_ref_model.svh"

  task automatic mmio_write(input cmd_e a, input logic [63:0] d);
    @(negedge clk); mmio_wr = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_wr = 0;
  endtask
  task automatic mmio_read(input cmd_e a, output logic [63:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = a;
    @(negedge clk); mmio_rd = 0;
    if (!mmio_rvalid) begin failures++; $display("FAIL no rvalid"); end
    d = mmio_rdata;
  endtask
  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %0d (0x%h) exp %0d", what, got, got, exp); end
  endtask

  task automatic offer_page(input logic [PAGE_W-1:0] p);
    @(negedge clk); page_empty = 0; page_data = p;
    @(posedge clk); #1;
    if (!page_pop) begin failures++; $display("FAIL page not popped"); end
    void'(rm_access(p));
    @(negedge clk); page_empty = 1;
  endtask

  longint s_cyc = 0, s_rd = 0, s_wr = 0;
  task automatic offer_sample(input int c, input int r, input int w);
    @(negedge clk); st_empty = 0; st_data.cycles = c; st_data.rd = r; st_data.wr = w;
    @(negedge clk); st_empty = 1;
    s_cyc += c; s_rd += r; s_wr += w;
  endtask

  task automatic drain_and_check_hot();
    logic [63:0] n, v;
    repeat (HSTAGES + 2 * K + 10) @(negedge clk);
    mmio_read(CMD_GET_NR_HOTPAGE, n);
    expect_eq("GetNrHotPage", n, (rm_hot_list.size() > HOT_ENTRIES) ? HOT_ENTRIES : rm_hot_list.size());
    for (int i = 0; i < n; i++) begin
      mmio_read(CMD_GET_HOTPAGE, v);
      expect_eq("GetHotPage", v, 64'(rm_hot_list[i]));
    end
    mmio_read(CMD_GET_HOTPAGE, v);
    expect_eq("GetHotPage empty", v, HOTPAGE_EMPTY);
    rm_hot_list.delete();
  endtask

  initial begin
    #5000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] v;
    rm_clear();
    repeat (3) @(posedge clk); rst_n = 1;
    mmio_read(CMD_SET_THRESHOLD, v);
    expect_eq("theta after reset", v, (1 << CNT_W) - 1);
    mmio_write(CMD_SET_THRESHOLD, 64'd6); rm_theta = 6;
    mmio_read(CMD_SET_THRESHOLD, v);
    expect_eq("theta", v, 6);
    for (int i = 0; i < 600; i++) begin
      offer_page(($urandom_range(0, 9) < 6) ? PAGE_W'(20'h100 + $urandom_range(0, 9)) : PAGE_W'($urandom));
      if (i % 50 == 0) offer_sample($urandom_range(100, 300), $urandom_range(0, 100), $urandom_range(0, 100));
    end
    drain_and_check_hot();
    mmio_read(CMD_GET_NR_SAMPLE, v); expect_eq("GetNrSample", v, s_cyc);
    mmio_read(CMD_GET_RD_CNT, v);    expect_eq("GetRdCnt", v, s_rd);
    mmio_read(CMD_GET_WR_CNT, v);    expect_eq("GetWrCnt", v, s_wr);
    // histogram
    mmio_write(CMD_SET_HIST_EN, 64'd1);
    mmio_read(CMD_GET_NR_HISTBIN, v); expect_eq("GetNrHistBin while busy", v, 0);
    repeat (W + 5) @(negedge clk);
    mmio_read(CMD_GET_NR_HISTBIN, v); expect_eq("GetNrHistBin", v, BINS);
    for (int b = 0; b < BINS; b++) begin
      mmio_read(CMD_GET_HIST, v); expect_eq($sformatf("GetHist bin %0d", b), v, rm_bin(b));
    end
    // overflow of the hot page buffer: many distinct pages above a low threshold
    mmio_write(CMD_SET_THRESHOLD, 64'd1); rm_theta = 1;
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 60; i++) offer_page(PAGE_W'(20'h4000 + i));
    drain_and_check_hot();
    // Reset clears everything but theta
    mmio_write(CMD_RESET, 64'd1); rm_clear();
    s_cyc = 0; s_rd = 0; s_wr = 0;
    repeat (3) @(negedge clk);
    mmio_read(CMD_GET_NR_HOTPAGE, v); expect_eq("hot pages after Reset", v, 0);
    mmio_read(CMD_GET_NR_SAMPLE, v);  expect_eq("samples after Reset", v, 0);
    mmio_read(CMD_GET_NR_HISTBIN, v); expect_eq("hist after Reset", v, 0);
    mmio_read(CMD_SET_THRESHOLD, v);  expect_eq("theta kept", v, 1);
    for (int i = 0; i < 3; i++) offer_page(PAGE_W'(20'h4000));   // count restarts from zero
    drain_and_check_hot();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
