// smart_pkg: constants and types shared by the colour-reconfigurable STT-RAM
// last-level cache (the "SMART" scheme).
//
// The cache is a 4 MB, 8-way, 64-byte-block L2 built from STT-RAM with a
// 1-second retention time. With 4 KB pages it splits into
//   N = size / (page * ways) = 4 MB / (4 KB * 8) = 128 cache colours,
// each colour being 64 consecutive sets. The colour of an address is the
// low 7 bits of its physical page number (address bits [18:12]); the mapping
// table turns that "region" number into the colour actually used.
//
// Energy constants are in femtojoules (fJ) and per 2 GHz clock cycle, taken
// from the published cache and DRAM figures:
//   L2 leakage 2235 mW        -> 1117500 fJ per cycle for the whole cache
//   L2 read 1.015 nJ, write 1.036 nJ per access
//   DRAM leakage 0.18 W       -> 90000 fJ per cycle
//   DRAM dynamic 70 nJ per access, block transition 0.002 nJ
// The physical address width (48 bits) is this design's choice.
package smart_pkg;

  // ---- cache geometry ----------------------------------------------------
  parameter int unsigned PA_W          = 48;     // physical address bits
  parameter int unsigned BLOCK_BYTES   = 64;
  parameter int unsigned BLOCK_BITS    = BLOCK_BYTES * 8;
  parameter int unsigned OFFSET_W      = 6;      // log2(64)
  parameter int unsigned PAGE_W        = 12;     // log2(4 KB)
  parameter int unsigned L2_WAYS       = 8;
  parameter int unsigned L2_SETS       = 8192;   // 4 MB / (64 B * 8)
  parameter int unsigned NUM_COLORS    = 128;    // Eq. 1
  parameter int unsigned SETS_PER_COLOR = L2_SETS / NUM_COLORS; // 64

  // ---- STT-RAM timing at 2 GHz (0.973 ns read, 5.571 ns write) -----------
  parameter int unsigned STT_READ_CYC  = 2;
  parameter int unsigned STT_WRITE_CYC = 12;

  // ---- algorithm settings ------------------------------------------------
  parameter int unsigned C_LOW         = NUM_COLORS / 16; // minimum colours
  parameter int unsigned Q_MAX         = 16;     // max colours changed per interval
  parameter int unsigned COLOR_STEP    = 2;      // allocation granularity
  parameter int unsigned LAMBDA_PERMILLE = 25;   // lambda = 2.5 %
  parameter int unsigned INTERVAL_INSTR = 15_000_000;
  parameter int unsigned NUM_PROF      = 5;      // profiling units X .. X/16
  parameter int unsigned SAMPLE_SHIFT  = 6;      // sampling ratio 1/64
  parameter int unsigned MEM_LATENCY   = 160;    // cycles, used when no miss seen

  // ---- energy model (fJ) -------------------------------------------------
  parameter longint unsigned L2_LEAK_FJ_PER_CYC   = 1_117_500; // whole cache
  parameter longint unsigned L2_READ_FJ           = 1_015_000;
  parameter longint unsigned L2_WRITE_FJ          = 1_036_000;
  parameter longint unsigned MEM_LEAK_FJ_PER_CYC  = 90_000;
  parameter longint unsigned MEM_DYN_FJ           = 70_000_000;
  parameter longint unsigned TRANSITION_FJ        = 2_000;
  // a power-gated colour still leaks about 3 % (31/1024)
  parameter int unsigned     GATED_LEAK_Q10       = 31;

  parameter int unsigned CNT_W  = 48;  // event counters
  parameter int unsigned E_W    = 96;  // energy accumulators

  // ---- LLC request / memory interface types --------------------------------
  typedef enum logic [1:0] {
    REQ_LOAD  = 2'd0,   // demand read from L1 (load miss)
    REQ_IFETCH= 2'd1,   // read that is not a load (instruction, store-allocate)
    REQ_WB    = 2'd2    // full-block write-back from L1
  } req_kind_e;

  // counts of one finished interval, as used by the energy-saving algorithm
  typedef struct packed {
    logic [CNT_W-1:0] cycles;       // core cycles in the interval
    logic [CNT_W-1:0] instr;        // retired instructions
    logic [CNT_W-1:0] stall;        // memory stall cycles (CPI-stack component)
    logic [CNT_W-1:0] load_misses;  // L2 load misses of the real cache
    logic [CNT_W-1:0] misses;       // all L2 misses of the real cache
    logic [CNT_W-1:0] reads;        // L2 read accesses
    logic [CNT_W-1:0] writes;       // L2 write accesses
  } interval_stats_t;

endpackage
