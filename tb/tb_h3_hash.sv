// tb_h3_hash: checks the pipelined H3 hash against a direct evaluation of
// h(x) = XOR over set bits i of x of seed word pi(i), for random and corner
// inputs, and checks that each result appears exactly STAGES cycles after
// its input.
module tb_h3_hash;
  import neoprof_pkg::*;
  localparam int unsigned N = 32, M = 19, STAGES = 4, KEY = 1;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [N-1:0] in_x, out_x;
  logic [M-1:0] out_hash;
  logic out_valid;
  int checks = 0, failures = 0;

  h3_hash #(.N(N), .M(M), .STAGES(STAGES), .SEED_KEY(KEY)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [M-1:0] ref_h3(input logic [N-1:0] x);
    logic [M-1:0] h = '0;
    for (int i = 0; i < N; i++) if (x[i]) h ^= M'(h3_seed(KEY, i));
    return h;
  endfunction

  logic [N-1:0] sent [$];
  int sent_cycle [$];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [N-1:0] x; int c;
    x = sent.pop_front(); c = sent_cycle.pop_front();
    checks++;
    if (out_x !== x || out_hash !== ref_h3(x) || cycle - c != STAGES) begin
      failures++;
      $display("FAIL x=%h hash=%h exp=%h latency=%0d", out_x, out_hash, ref_h3(x), cycle - c);
    end
  end

  initial begin
    #20000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_x = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      case (i)
        0: in_x = '0;
        1: in_x = '1;
        2: in_x = 32'h1;
        3: in_x = 32'h8000_0000;
        default: in_x = $urandom;
      endcase
      if (in_valid) begin sent.push_back(in_x); sent_cycle.push_back(cycle); end
    end
    @(negedge clk); in_valid = 0;
    repeat (STAGES + 3) @(posedge clk);
    // seed words must differ between lanes, or the lanes would collide alike
    checks++;
    if (h3_seed(0, 5) == h3_seed(1, 5)) failures++;
    if (sent.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
