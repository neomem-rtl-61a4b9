// Reference model shared by the core and top testbenches: a software
// Count-Min sketch with the same H3 hashes, saturating counters and hot
// bits as the hardware, and the histogram rule of the histogram unit.
// Expects localparams W, D, CNT_W, PAGE_W, BINS, BIN_SHIFT and the import
// of neoprof_pkg in the including module.
localparam int unsigned RM_IDX_W = $clog2(W);

int unsigned rm_cnt [D][W];
bit          rm_hot [D][W];
int unsigned rm_theta = 32'hFFFF_FFFF;
int unsigned rm_saturations = 0;
logic [PAGE_W-1:0] rm_hot_list [$];

function automatic int unsigned rm_hidx(input int d, input logic [PAGE_W-1:0] p);
  logic [RM_IDX_W-1:0] h = '0;
  for (int i = 0; i < PAGE_W; i++) if (p[i]) h ^= RM_IDX_W'(h3_seed(d, i));
  return h;
endfunction

function automatic void rm_clear();
  foreach (rm_cnt[d, i]) begin rm_cnt[d][i] = 0; rm_hot[d][i] = 0; end
  rm_hot_list.delete();
endfunction

// returns 0: not hot, 1: new hot page, 2: hot but filtered
function automatic int rm_access(input logic [PAGE_W-1:0] p);
  int unsigned mn = 32'hFFFF_FFFF; bit any_clear = 0;
  for (int d = 0; d < D; d++) begin
    int unsigned ix = rm_hidx(d, p);
    if (rm_cnt[d][ix] < (1 << CNT_W) - 1) rm_cnt[d][ix]++; else rm_saturations++;
    if (rm_cnt[d][ix] < mn) mn = rm_cnt[d][ix];
  end
  if (mn <= rm_theta) return 0;
  for (int d = 0; d < D; d++) begin
    int unsigned ix = rm_hidx(d, p);
    if (!rm_hot[d][ix]) any_clear = 1;
    rm_hot[d][ix] = 1;
  end
  if (any_clear) rm_hot_list.push_back(p);
  return any_clear ? 1 : 2;
endfunction

function automatic int unsigned rm_bin(input int b);
  int unsigned n = 0;
  for (int i = 0; i < W; i++) if (rm_cnt[0][i] != 0) begin
    int unsigned bi = rm_cnt[0][i] >> BIN_SHIFT;
    if (bi > BINS - 1) bi = BINS - 1;
    if (bi == b) n++;
  end
  return n;
endfunction
