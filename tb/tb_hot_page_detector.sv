// tb_hot_page_detector: a skewed page stream (a few hot pages, many cold
// ones) runs through a small detector. A software Count-Min sketch with
// the same H3 hashes, counters and hot bits predicts, for every input page,
// whether it is reported new, filtered as a duplicate or neither, and the
// cycle this happens (LATENCY after the input). The stream is long enough
// for counters to saturate; a clear in the middle starts a new period, and
// the threshold changes once.
module tb_hot_page_detector;
  import neoprof_pkg::*;
  localparam int unsigned W = 256, D = 2, K = 4, HOT_K = 4, CNT_W = 8, PAGE_W = 16, HSTAGES = 2, IDX_W = 8;
  localparam int unsigned LAT = HSTAGES + (K + 1) + 1 + (HOT_K + 1) + 1;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [CNT_W-1:0] threshold;
  logic in_valid = 0; logic [PAGE_W-1:0] in_page = 0;
  logic out_new, out_dup; logic [PAGE_W-1:0] out_page;
  logic scan_en = 0; logic [IDX_W-1:0] scan_idx = 0;
  logic scan_rvalid, scan_entry_valid; logic [CNT_W-1:0] scan_count;
  int checks = 0, failures = 0, n_new = 0, n_dup = 0, n_sat = 0;

  hot_page_detector #(.W(W), .D(D), .K(K), .HOT_K(HOT_K), .CNT_W(CNT_W), .PAGE_W(PAGE_W), .HSTAGES(HSTAGES)) dut (.*);
  always #5 clk = ~clk;

  int cnt [D][W]; bit hot [D][W];
  int e_kind [$]; int e_page [$]; int e_cyc [$];   // kind: 0 none, 1 new, 2 dup
  int m_min [$]; int m_cyc [$];                      // Count-Min estimate at the checker
  localparam int unsigned CHK_LAT = HSTAGES + (K + 1) + 1;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int hidx(input int d, input logic [PAGE_W-1:0] p);
    logic [IDX_W-1:0] h = '0;
    for (int i = 0; i < PAGE_W; i++) if (p[i]) h ^= IDX_W'(h3_seed(d, i));
    return h;
  endfunction

  task automatic model(input logic [PAGE_W-1:0] p);
    int mn = 1 << 30; bit any_clear = 0; int k;
    for (int d = 0; d < D; d++) begin
      int ix = hidx(d, p);
      if (cnt[d][ix] < (1 << CNT_W) - 1) cnt[d][ix]++; else n_sat++;
      if (cnt[d][ix] < mn) mn = cnt[d][ix];
    end
    k = 0;
    if (mn > threshold) begin
      for (int d = 0; d < D; d++) begin
        int ix = hidx(d, p);
        if (!hot[d][ix]) any_clear = 1;
        hot[d][ix] = 1;
      end
      k = any_clear ? 1 : 2;
    end
    e_kind.push_back(k); e_page.push_back(p); e_cyc.push_back(cycle);
    m_min.push_back(mn); m_cyc.push_back(cycle);
  endtask

  // the estimate (minimum over lanes) seen by the hot page checker
  always @(posedge clk) if (rst_n && m_cyc.size() > 0 && cycle - m_cyc[0] == CHK_LAT) begin
    int mn;
    mn = m_min.pop_front(); void'(m_cyc.pop_front());
    checks++;
    if (!dut.c_valid || dut.c_min != CNT_W'(mn)) begin
      failures++; $display("FAIL estimate %0d exp %0d", dut.c_min, mn);
    end
  end

  // every input produces exactly one comparison, LAT cycles later
  always @(posedge clk) if (rst_n && e_cyc.size() > 0 && cycle - e_cyc[0] == LAT) begin
    int k, p;
    k = e_kind.pop_front(); p = e_page.pop_front(); void'(e_cyc.pop_front());
    checks++;
    if (out_new != (k == 1) || out_dup != (k == 2) || (k == 1 && out_page != PAGE_W'(p))) begin
      failures++; $display("FAIL page=%h kind=%0d new=%0d dup=%0d", p, k, out_new, out_dup);
    end
    if (k == 1) n_new++;
    if (k == 2) n_dup++;
  end

  task automatic send(input logic [PAGE_W-1:0] p);
    @(negedge clk); in_valid = 1; in_page = p; model(p);
  endtask
  task automatic idle(input int n);
    repeat (n) begin @(negedge clk); in_valid = 0; end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    threshold = 8'd20;
    foreach (cnt[d, i]) begin cnt[d][i] = 0; hot[d][i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int r; r = $urandom_range(0, 99);
      if (r < 60) send(PAGE_W'(16'h1000 + $urandom_range(0, 7)));
      else if (r < 95) send(PAGE_W'($urandom));
      else idle(1);
    end
    idle(LAT + 2);
    // new period
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (cnt[d, i]) begin cnt[d][i] = 0; hot[d][i] = 0; end
    threshold = 8'd5;
    for (int i = 0; i < 500; i++) send(PAGE_W'(16'h2000 + $urandom_range(0, 15)));
    idle(LAT + 2);
    checks++; if (n_new == 0 || n_dup == 0 || n_sat == 0) begin failures++; $display("coverage new=%0d dup=%0d sat=%0d", n_new, n_dup, n_sat); end
    checks++; if (e_kind.size() != 0) failures++;
    $display("new=%0d dup=%0d saturations=%0d", n_new, n_dup, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
