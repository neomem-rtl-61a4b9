// neoprof_pkg: sizes, command offsets and shared types of the NeoProf memory
// access profiler.
//
// The default sizes are the profiler's main configuration: 32-bit page
// numbers of 4KB pages, 16-bit sketch counters, a sketch of 2 lanes x 512K
// entries split into 128 pipelined memory segments, a 16K-entry hot page
// buffer and a 64-bin histogram. The MMIO offsets are those of the command
// set (Reset 0x100 ... GetHist 0xA00). The data width of the MMIO port, the
// H3 seed generator, the number of hash pipeline stages, the histogram bin
// width and the state sampling window are this design's own choices.
package neoprof_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned PAGE_ADDR_BITS   = 32;        // device page number
  localparam int unsigned PAGE_SHIFT       = 12;        // 4KB pages
  localparam int unsigned BYTE_ADDR_BITS   = PAGE_ADDR_BITS + PAGE_SHIFT; // 16TB
  localparam int unsigned COUNTER_BITS     = 16;
  localparam int unsigned SKETCH_WIDTH     = 512 * 1024; // W
  localparam int unsigned SKETCH_LANES     = 2;          // D
  localparam int unsigned SKETCH_SEGMENTS  = 128;        // K
  localparam int unsigned HOT_BUF_ENTRIES  = 16 * 1024;
  localparam int unsigned HIST_BINS        = 64;
  localparam int unsigned HIST_BIN_SHIFT   = 4;          // bin = count >> 4
  localparam int unsigned HASH_STAGES      = 4;          // M
  localparam int unsigned STATE_WINDOW     = 256;        // cycles per state sample
  localparam int unsigned CDC_FIFO_DEPTH   = 16;

  // ------------------------------------------------------------ MMIO port
  localparam int unsigned MMIO_ADDR_BITS = 12;
  localparam int unsigned MMIO_DATA_BITS = 64;

  typedef enum logic [MMIO_ADDR_BITS-1:0] {
    CMD_RESET          = 12'h100,  // write 1: clear counters and buffers
    CMD_SET_THRESHOLD  = 12'h200,  // write theta
    CMD_GET_NR_HOTPAGE = 12'h300,  // read number of buffered hot pages
    CMD_GET_HOTPAGE    = 12'h400,  // read (and remove) one hot page address
    CMD_GET_NR_SAMPLE  = 12'h500,  // read sampled cycles
    CMD_GET_RD_CNT     = 12'h600,  // read cycles carrying read data
    CMD_GET_WR_CNT     = 12'h700,  // read cycles carrying write data
    CMD_SET_HIST_EN    = 12'h800,  // write 1: start histogram calculation
    CMD_GET_NR_HISTBIN = 12'h900,  // read number of histogram bins (0 while busy)
    CMD_GET_HIST       = 12'hA00   // read next histogram bin
  } cmd_e;

  // Value returned by GetHotPage when the hot page buffer is empty.
  localparam logic [MMIO_DATA_BITS-1:0] HOTPAGE_EMPTY = '1;

  // --------------------------------------------------------- state sample
  // One sample of the state monitor, sent through the State async FIFO:
  // cycles in the window, and the cycles of it carrying read / write data.
  typedef struct packed {
    logic [31:0] cycles;
    logic [31:0] rd;
    logic [31:0] wr;
  } state_sample_t;

  // ------------------------------------------------------------- H3 seeds
  // Seed word pi(bit) of the H3 hash of lane 'key': a fixed pseudo-random
  // 32-bit word (a multiply/xor-shift mixer of a key/bit mix); an m-bit hash
  // uses its low m bits. The mixer must be non-linear over GF(2): with a
  // purely xor-shift mixer the key would cancel out of the xor of any even
  // number of seeds, and the lanes would hash most pages to the same index.
  function automatic logic [31:0] h3_seed(input int unsigned key, input int unsigned bitpos);
    logic [31:0] s;
    s = (32'(key + 1) * 32'h9E37_79B9) + (32'(bitpos + 1) * 32'h85EB_CA6B) + 32'h2545_F491;
    for (int r = 0; r < 2; r++) begin
      s = (s ^ (s >> 16)) * 32'h7FEB_352D;
      s = (s ^ (s >> 15)) * 32'h846C_A68B;
      s = s ^ (s >> 16);
    end
    return s;
  endfunction

endpackage
