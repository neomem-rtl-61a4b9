// h3_hash: pipelined H3 hash unit, one per sketch lane.
//
// Computes h(x) = x(0)&pi(0) ^ x(1)&pi(1) ^ ... ^ x(N-1)&pi(N-1), where x is
// the N-bit page address and each pi(i) is an M-bit seed word. The XOR
// reduction is split into STAGES pipeline stages: stage s folds the terms of
// input bits [s*PER, (s+1)*PER) into a running hash carried down the pipe.
// The H3 formula and the split into pipeline stages follow the profiler's
// description; the number of stages and the seed words (neoprof_pkg::h3_seed
// with key SEED_KEY) are this design's choice.
//
// Interface: in_valid/in_x enter every cycle (no back-pressure); out_valid,
// out_hash and out_x (the input delayed) appear exactly STAGES cycles later.
module h3_hash
  import neoprof_pkg::*;
#(
  parameter int unsigned N        = PAGE_ADDR_BITS,
  parameter int unsigned M        = $clog2(SKETCH_WIDTH),
  parameter int unsigned STAGES   = HASH_STAGES,
  parameter int unsigned SEED_KEY = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] in_x,
  output logic         out_valid,
  output logic [N-1:0] out_x,
  output logic [M-1:0] out_hash
);
  localparam int unsigned PER = (N + STAGES - 1) / STAGES;

  typedef logic [M-1:0] seed_t;

  function automatic logic [N*M-1:0] gen_seeds();
    logic [N*M-1:0] s;
    for (int unsigned b = 0; b < N; b++) begin
      logic [31:0] w;
      w = h3_seed(SEED_KEY, b);
      s[b*M +: M] = w[M-1:0];
    end
    return s;
  endfunction

  localparam logic [N*M-1:0] SEEDS = gen_seeds();

  logic         v   [STAGES+1];
  logic [N-1:0] x   [STAGES+1];
  logic [M-1:0] acc [STAGES+1];

  assign v[0]   = in_valid;
  assign x[0]   = in_x;
  assign acc[0] = '0;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic [M-1:0] part;
    always_comb begin
      part = acc[s];
      for (int unsigned b = s * PER; b < (s + 1) * PER && b < N; b++) begin
        if (x[s][b]) part = part ^ SEEDS[b*M +: M];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[s+1]   <= 1'b0;
        x[s+1]   <= '0;
        acc[s+1] <= '0;
      end else begin
        v[s+1]   <= v[s];
        x[s+1]   <= x[s];
        acc[s+1] <= part;
      end
    end
  end

  assign out_valid = v[STAGES];
  assign out_x     = x[STAGES];
  assign out_hash  = acc[STAGES];
endmodule
