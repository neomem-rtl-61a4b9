// Body of the end-to-end testbenches of neoprof_top. The including module
// declares the localparams (W, D, K, CNT_W, PAGE_W, HOT_ENTRIES, BINS,
// BIN_SHIFT, HSTAGES, WINDOW, N_MAIN, N_BURST, HOT_SET, COLD_SPAN,
// REQUIRE_ALL), the signals
// below and the DUT instance 'dut'.
//
// Sequence: SetThreshold; a skewed request stream at a rate the core keeps
// up with (every snooped page must reach the core, in order); drain and read
// all hot pages, compared with the reference sketch; state totals against
// the beats the testbench drove; SetHistEn, GetNrHistBin, GetHist against
// the model, and the p-percentile a host would derive; a burst at full
// request rate that overruns the Page Addr FIFO (drops are counted, and the
// core must take one page per core cycle); Reset; a short second period.
// Each mechanism is counted and one that never happened is a failure when
// REQUIRE_ALL is set.

`include "neoprof_ref_model.svh"

int checks = 0, failures = 0;
int unsigned n_cross = 0, n_new = 0, n_dup = 0, n_hist = 0, n_reset = 0, n_theta = 0, n_beats = 0;
int unsigned core_cycles_busy = 0, core_pops_busy = 0;

always #2 clk_mem  = ~clk_mem;    // memory controller clock
always #3 clk_core = ~clk_core;   // slower profiler core clock

// ---------------------------------------------------------------- mem side
logic [PAGE_W-1:0] sent_pages [$];
longint mem_cycles = 0;
int unsigned cum_rd [$], cum_wr [$];
int unsigned acc_rd = 0, acc_wr = 0;
bit burst = 0, drive_en = 0;

always @(posedge clk_mem) if (rst_mem_n) begin
  mem_cycles++;
  acc_rd += rd_beat; acc_wr += wr_beat;
  cum_rd.push_back(acc_rd); cum_wr.push_back(acc_wr);
  if (rd_beat || wr_beat) n_beats++;
  if (req_valid) sent_pages.push_back(req_addr[PAGE_W+PAGE_SHIFT-1:PAGE_SHIFT]);
end

function automatic logic [PAGE_W-1:0] pick_page();
  int r = $urandom_range(0, 99);
  if (r < 70) return PAGE_W'(32'h0003_0000 + $urandom_range(0, HOT_SET - 1));   // hot set
  return PAGE_W'(32'h0100_0000 + $urandom_range(0, COLD_SPAN - 1));              // cold pages
endfunction

always @(negedge clk_mem) begin
  bit v;
  v = drive_en && (burst ? 1'b1 : ($urandom_range(0, 3) == 0));
  req_valid <= v;
  req_addr  <= {pick_page(), 12'($urandom)};
  rd_beat   <= drive_en && ($urandom_range(0, 2) == 0);
  wr_beat   <= drive_en && ($urandom_range(0, 4) == 0);
end

// --------------------------------------------------------------- core side
logic [PAGE_W-1:0] arrived [$];
always @(posedge clk_core) if (rst_core_n) begin
  if (!dut.u_core.page_empty) core_cycles_busy++;
  if (dut.u_core.page_pop) begin
    core_pops_busy++;
    arrived.push_back(dut.u_core.page_data);
    void'(rm_access(dut.u_core.page_data));
    n_cross++;
  end
  if (dut.u_core.det_new) n_new++;
  if (dut.u_core.det_dup) n_dup++;
end

task automatic mmio_write(input cmd_e a, input logic [63:0] d);
  @(negedge clk_core); mmio_wr = 1; mmio_addr = a; mmio_wdata = d;
  @(negedge clk_core); mmio_wr = 0;
endtask
task automatic mmio_read(input cmd_e a, output logic [63:0] d);
  @(negedge clk_core); mmio_rd = 1; mmio_addr = a;
  @(negedge clk_core); mmio_rd = 0;
  if (!mmio_rvalid) begin failures++; $display("FAIL no rvalid"); end
  d = mmio_rdata;
endtask
task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
  checks++;
  if (got !== exp) begin failures++; $display("FAIL %s: %0d (0x%h) exp %0d", what, got, got, exp); end
endtask

task automatic wait_quiet();
  // no new requests, FIFO drained and detector pipeline empty
  repeat (HSTAGES + 2 * K + 40) @(negedge clk_core);
endtask

task automatic read_hot_pages();
  logic [63:0] n, v;
  int unsigned exp_n;
  mmio_read(CMD_GET_NR_HOTPAGE, n);
  exp_n = (rm_hot_list.size() > HOT_ENTRIES) ? HOT_ENTRIES : rm_hot_list.size();
  expect_eq("GetNrHotPage", n, exp_n);
  for (int unsigned i = 0; i < n && i < exp_n; i++) begin
    mmio_read(CMD_GET_HOTPAGE, v);
    expect_eq("GetHotPage", v, 64'(rm_hot_list[i]));
  end
  mmio_read(CMD_GET_HOTPAGE, v);
  expect_eq("GetHotPage when empty", v, HOTPAGE_EMPTY);
  rm_hot_list.delete();
endtask

initial begin
  logic [63:0] v, ns, nr, nw, ns2;
  int unsigned theta, total, acc, pct_bin, exp_total;
  longint burst_sent0, burst_arr0;
  mmio_wr = 0; mmio_rd = 0; mmio_addr = '0; mmio_wdata = '0;
  req_valid = 0; req_addr = '0; rd_beat = 0; wr_beat = 0;
  rm_clear();
  repeat (4) @(posedge clk_core);
  rst_mem_n = 1; rst_core_n = 1;

  // ---- period 1
  theta = 3;
  mmio_write(CMD_SET_THRESHOLD, 64'(theta)); rm_theta = theta; n_theta++;
  mmio_read(CMD_SET_THRESHOLD, v); expect_eq("theta", v, theta);
  drive_en = 1;
  wait (sent_pages.size() >= N_MAIN);
  drive_en = 0;
  wait_quiet();
  checks++;
  if (arrived.size() != sent_pages.size() || page_drops != 0) begin
    failures++; $display("FAIL arrived %0d of %0d, drops %0d", arrived.size(), sent_pages.size(), page_drops);
  end
  for (int i = 0; i < arrived.size() && i < sent_pages.size(); i++)
    if (arrived[i] != sent_pages[i]) begin failures++; $display("FAIL page order at %0d", i); break; end
  read_hot_pages();

  // ---- state totals (retry if a sample arrives between the reads)
  do begin
    mmio_read(CMD_GET_NR_SAMPLE, ns);
    mmio_read(CMD_GET_RD_CNT, nr);
    mmio_read(CMD_GET_WR_CNT, nw);
    mmio_read(CMD_GET_NR_SAMPLE, ns2);
  end while (ns != ns2);
  checks++;
  if (ns == 0 || ns > mem_cycles || nr != 64'(cum_rd[ns-1]) || nw != 64'(cum_wr[ns-1])) begin
    failures++; $display("FAIL state: samples %0d rd %0d (exp %0d) wr %0d (exp %0d)", ns, nr, cum_rd[ns-1], nw, cum_wr[ns-1]);
  end
  $display("bandwidth utilisation (rd+wr)/cycles = %0d/%0d", nr + nw, ns);

  // ---- histogram and host-side percentile (error-bound estimation)
  mmio_write(CMD_SET_HIST_EN, 64'd1); n_hist++;
  mmio_read(CMD_GET_NR_HISTBIN, v); expect_eq("GetNrHistBin while busy", v, 0);
  repeat (W + 8) @(negedge clk_core);
  mmio_read(CMD_GET_NR_HISTBIN, v); expect_eq("GetNrHistBin", v, BINS);
  total = 0; exp_total = 0;
  begin
    int unsigned hist [BINS];
    for (int b = 0; b < BINS; b++) begin
      mmio_read(CMD_GET_HIST, v);
      expect_eq($sformatf("GetHist bin %0d", b), v, rm_bin(b));
      hist[b] = v; total += v;
    end
    for (int i = 0; i < W; i++) if (rm_cnt[0][i] != 0) exp_total++;
    expect_eq("histogram total = touched entries of lane 0", total, exp_total);
    // host: accumulate bins until 50% of the entries (the median for D=2)
    acc = 0; pct_bin = 0;
    for (int b = 0; b < BINS; b++) begin acc += hist[b]; if (2 * acc >= total) begin pct_bin = b; break; end end
    $display("median bin of lane 0 = %0d (counts %0d..%0d)", pct_bin, pct_bin << BIN_SHIFT, ((pct_bin + 1) << BIN_SHIFT) - 1);
  end

  // ---- burst at full request rate: FIFO overruns, core takes one page per cycle
  core_cycles_busy = 0; core_pops_busy = 0;
  burst_sent0 = sent_pages.size(); burst_arr0 = arrived.size();
  burst = 1; drive_en = 1;
  wait (sent_pages.size() >= burst_sent0 + N_BURST);
  drive_en = 0; burst = 0;
  wait_quiet();
  checks++;
  if (longint'(arrived.size() - burst_arr0) + page_drops != longint'(sent_pages.size() - burst_sent0)) begin
    failures++; $display("FAIL burst: arrived %0d + dropped %0d != sent %0d", arrived.size() - burst_arr0, page_drops, sent_pages.size() - burst_sent0);
  end
  expect_eq("one page per core cycle while the FIFO holds pages", core_pops_busy, core_cycles_busy);
  read_hot_pages();

  // ---- Reset: new detection period
  mmio_write(CMD_RESET, 64'd1); n_reset++; rm_clear();
  repeat (3) @(negedge clk_core);
  mmio_read(CMD_GET_NR_HOTPAGE, v); expect_eq("hot pages after Reset", v, 0);
  mmio_read(CMD_GET_NR_HISTBIN, v); expect_eq("histogram after Reset", v, 0);
  theta = 1;
  mmio_write(CMD_SET_THRESHOLD, 64'(theta)); rm_theta = theta; n_theta++;
  burst_sent0 = sent_pages.size();
  drive_en = 1;
  wait (sent_pages.size() >= burst_sent0 + N_MAIN / 4);
  drive_en = 0;
  wait_quiet();
  read_hot_pages();

  $display("mechanisms: crossed=%0d new_hot=%0d filtered=%0d saturations=%0d buf_overflows=%0d fifo_drops=%0d hist=%0d reset=%0d theta=%0d beats=%0d",
           n_cross, n_new, n_dup, rm_saturations, dut.u_core.hb_overflows, page_drops, n_hist, n_reset, n_theta, n_beats);
  checks++;
  if (n_cross == 0 || n_new == 0 || n_dup == 0 || n_hist == 0 || n_reset == 0 || n_theta < 2 || n_beats == 0 || page_drops == 0)
    begin failures++; $display("FAIL a mechanism never happened"); end
  if (REQUIRE_ALL) begin
    checks++;
    if (rm_saturations == 0) begin failures++; $display("FAIL no counter saturated"); end
    checks++;
    if (n_new <= HOT_ENTRIES) begin failures++; $display("FAIL hot page buffer never overflowed"); end
  end
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
