// tb_hotbit_lane: random requests, some marked hot, against a software bit
// array: the returned bit must be the value before this request, hot
// requests must set it, latency must be K+1, and clear must empty the array.
module tb_hotbit_lane;
  localparam int unsigned W = 128, K = 4, TAG_W = 8, IDX_W = 7;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid, in_set; logic [IDX_W-1:0] in_idx; logic [TAG_W-1:0] in_tag;
  logic out_valid, out_set, out_old; logic [TAG_W-1:0] out_tag;
  int checks = 0, failures = 0, olds = 0;

  hotbit_lane #(.W(W), .K(K), .TAG_W(TAG_W), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;

  bit model [W];
  int e_old [$]; int e_set [$]; int e_tag [$]; int e_cyc [$];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    int o, s, t, c;
    o = e_old.pop_front(); s = e_set.pop_front(); t = e_tag.pop_front(); c = e_cyc.pop_front();
    checks++;
    if (out_old != o[0] || out_set != s[0] || out_tag != TAG_W'(t) || cycle - c != K + 1) begin
      failures++; $display("FAIL tag=%0d old=%0d exp=%0d lat=%0d", out_tag, out_old, o, cycle - c);
    end
    if (out_old) olds++;
  end

  task automatic send(input int ix, input bit s);
    @(negedge clk);
    in_valid = 1; in_idx = IDX_W'(ix); in_set = s; in_tag = TAG_W'(ix);
    e_old.push_back(model[ix]); e_set.push_back(s); e_tag.push_back(ix); e_cyc.push_back(cycle);
    if (s) model[ix] = 1;
  endtask

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_set = 0; in_idx = 0; in_tag = 0;
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    send(5, 1); send(5, 1); send(5, 0);     // back to back on one entry
    for (int i = 0; i < 1500; i++) send($urandom_range(0, 40), $urandom_range(0, 2) == 0);
    @(negedge clk); in_valid = 0;
    repeat (K + 3) @(negedge clk);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (model[i]) model[i] = 0;
    for (int i = 0; i < 200; i++) send($urandom_range(0, W - 1), 0);
    @(negedge clk); in_valid = 0;
    repeat (K + 3) @(negedge clk);
    checks++; if (olds == 0) begin failures++; $display("no set bit ever read"); end
    checks++; if (e_old.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
