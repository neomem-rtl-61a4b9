// tb_sketch_lane: drives random indices (biased onto a few entries so
// counters grow and neighbours in one segment collide) into a small sketch
// lane and compares every returned count with a software array of counters;
// checks the K+1 cycle latency, saturation at the counter maximum, the
// one-cycle clear of all valid bits, and the scan read port.
module tb_sketch_lane;
  import neoprof_pkg::*;
  localparam int unsigned W = 256, K = 8, CNT_W = 6, TAG_W = 8, IDX_W = 8;

  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid; logic [IDX_W-1:0] in_idx; logic [TAG_W-1:0] in_tag;
  logic out_valid; logic [IDX_W-1:0] out_idx; logic [TAG_W-1:0] out_tag; logic [CNT_W-1:0] out_count;
  logic scan_en = 0; logic [IDX_W-1:0] scan_idx = 0;
  logic scan_rvalid, scan_entry_valid; logic [CNT_W-1:0] scan_count;
  int checks = 0, failures = 0;

  sketch_lane #(.W(W), .K(K), .CNT_W(CNT_W), .TAG_W(TAG_W), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;

  int model [W];
  int exp_q [$]; int exp_idx [$]; int exp_cyc [$];
  int cycle = 0; int saturations = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, ix, c;
    e = exp_q.pop_front(); ix = exp_idx.pop_front(); c = exp_cyc.pop_front();
    checks++;
    if (out_count != CNT_W'(e) || out_idx != IDX_W'(ix) || out_tag != TAG_W'(ix) || cycle - c != K + 1) begin
      failures++;
      $display("FAIL idx=%0d count=%0d exp=%0d latency=%0d", out_idx, out_count, e, cycle - c);
    end
  end

  task automatic send(input int ix);
    @(negedge clk);
    in_valid = 1; in_idx = IDX_W'(ix); in_tag = TAG_W'(ix);
    if (model[ix] < (1 << CNT_W) - 1) model[ix]++; else saturations++;
    exp_q.push_back(model[ix]); exp_idx.push_back(ix); exp_cyc.push_back(cycle);
  endtask

  task automatic idle(input int n);
    repeat (n) begin @(negedge clk); in_valid = 0; end
  endtask

  initial begin
    #400000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_idx = 0; in_tag = 0;
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // back-to-back hits on one entry, then random traffic on hot entries
    for (int i = 0; i < 5; i++) send(7);
    for (int i = 0; i < 2000; i++) begin
      int r; r = $urandom_range(0, 9);
      if (r < 5) send($urandom_range(0, 3) * 33);    // a few hot entries in different segments
      else if (r < 8) send($urandom_range(0, W - 1));
      else idle(1);
    end
    for (int i = 0; i < 80; i++) send(99);            // drive one counter into saturation
    idle(K + 4);
    checks++; if (saturations == 0) begin failures++; $display("no saturation seen"); end
    // scan port: every entry
    for (int i = 0; i < W; i++) begin
      @(negedge clk); scan_en = 1; scan_idx = IDX_W'(i);
      @(negedge clk); scan_en = 0;
      checks++;
      if (!scan_rvalid || scan_entry_valid != (model[i] != 0) || scan_count != CNT_W'(model[i])) begin
        failures++; $display("FAIL scan %0d: v=%0d cnt=%0d exp=%0d", i, scan_entry_valid, scan_count, model[i]);
      end
    end
    // clear in one cycle, with an access in the same cycle starting the new period
    @(negedge clk); clear = 1; in_valid = 1; in_idx = 8'd33; in_tag = 8'd33;
    foreach (model[i]) model[i] = 0;
    model[33] = 1; exp_q.push_back(1); exp_idx.push_back(33); exp_cyc.push_back(cycle);
    @(negedge clk); clear = 0; in_valid = 0;
    // the request entered before the clear hits its segment later: it is
    // already in the pipe, so it counts after the clear
    idle(K + 4);
    for (int i = 0; i < 40; i++) send($urandom_range(0, W - 1));
    send(33);
    idle(K + 4);
    checks++; if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
