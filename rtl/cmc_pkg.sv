// cmc_pkg: shared types and constants of the competitive-miss-reducing memory
// system: a 4-thread core's L1 that is shared on lookup but refilled only in
// the missing thread's own partition, with L2, L3 and an L2 prefetch queue.
// The technique is the one of Prisagjanec and Mitrevski, "Reducing
// Competitive Cache Misses in Modern Processor Architectures"; "the original
// authors" in these files means them.
// A "block" here is one addressed word, as in the original authors' simulator
// the sizes are taken from: each cache line holds one address and its data.
// Sizes that follow the source: 4 hardware threads, L1/L2/L3 capacities of
// 128/256/512 blocks, access times of 2.5 (rounded up to 3), 10 and 60 cycles.
// Address and data widths are this design's own choice (32 bits each).
package cmc_pkg;

  localparam int unsigned NUM_THREADS = 4;
  localparam int unsigned ADDR_W      = 32;
  localparam int unsigned DATA_W      = 32;
  localparam int unsigned L1_LINES    = 128;
  localparam int unsigned L2_LINES    = 256;
  localparam int unsigned L3_LINES    = 512;
  localparam int unsigned L2_LAT      = 3;   // 2.5 time units, rounded up
  localparam int unsigned L3_LAT      = 10;
  localparam int unsigned RAM_LAT     = 60;  // used by the memory model only
  localparam int unsigned PF_DEPTH    = 4;   // prefetch distance, 4..6 is best
  localparam int unsigned CNT_W       = 32;

  // Level that served a request, reported with every response.
  typedef enum logic [1:0] {
    SRC_L1  = 2'd0,
    SRC_L2  = 2'd1,
    SRC_L3  = 2'd2,
    SRC_RAM = 2'd3
  } src_e;

  // Event counters of the memory system (Table-1-style miss counts plus
  // counts of the mechanisms the design adds).
  typedef struct packed {
    logic [CNT_W-1:0] accesses;     // L1 lookups that completed (hit or miss)
    logic [CNT_W-1:0] l1_misses;
    logic [CNT_W-1:0] l2_misses;
    logic [CNT_W-1:0] l3_misses;
    logic [CNT_W-1:0] shared_hits;  // L1 hits on a line owned by another thread
    logic [CNT_W-1:0] evictions;    // L1 refills that replaced a valid block (always
                                    // one of the refilling thread's own blocks)
    logic [CNT_W-1:0] busy_stalls;  // misses refused because a miss was in flight
    logic [CNT_W-1:0] pf_issued;    // prefetches that loaded a block into L2
    logic [CNT_W-1:0] pf_dropped;   // prefetches already present in L2, or queue full
  } counters_t;

endpackage
