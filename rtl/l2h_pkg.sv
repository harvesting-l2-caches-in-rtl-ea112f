// l2h_pkg: constants and types shared by the L2 Harvester blocks.
//
// The harvester sits between the shared last-level cache (LLC) and the memory
// controller. Each LLC eviction is either written back to memory or, if it is
// predicted to be still alive and an idle core can lend its private L2, written
// up into that L2. The defaults below describe the quad-core system the design
// is built for: 4 cores, 16 GB of memory (a 34-bit byte address), a 4-table
// bloom filter of 4096 entries per table, a 100-entry send-up likelihood table
// of 2-byte entries, and 1.25 MB private L2 caches. The 64-byte line, the 8-bit
// MPKI value and the thresholds WARMUP_TH, RESET_INTERVAL and MPKI_TH are this
// design's own choices.
package l2h_pkg;

  // ---- system sizes ----
  localparam int unsigned NCORES      = 4;      // quad-core system
  localparam int unsigned PADDR_W     = 34;     // 16 GB of memory
  localparam int unsigned LINE_BYTES  = 64;     // cache line (own choice)
  localparam int unsigned BLK_ADDR_W  = PADDR_W - $clog2(LINE_BYTES);  // 28
  localparam int unsigned LINE_W      = LINE_BYTES * 8;                // 512
  localparam int unsigned L2_BYTES    = 1280 * 1024;                   // 1.25 MB per core
  localparam int unsigned L2_LINES    = L2_BYTES / LINE_BYTES;         // 20480
  localparam int unsigned CORE_W      = (NCORES > 1) ? $clog2(NCORES) : 1;

  // ---- predictor ----
  localparam int unsigned BF_HASHES   = 4;      // hash functions / tables
  localparam int unsigned BF_ENTRIES  = 4096;   // entries per table
  localparam int unsigned WARMUP_TH   = 1024;   // insertions before the filter is trusted (own choice)
  localparam int unsigned RESET_INTERVAL = 4096; // insertions between clears (own choice)
  localparam int unsigned MPKI_W      = 8;      // MPKI carried as an 8-bit integer (own choice)
  localparam int unsigned MPKI_TH     = 20;     // "load is high" threshold (own choice)

  // ---- load balancer ----
  localparam int unsigned LUT_ENTRIES = 100;    // send-up likelihood for MPKI 0..99
  localparam int unsigned LUT_W       = 16;     // 2 bytes per entry, 65535 = 1.0
  localparam int unsigned RAND_W      = 16;

  // Which rule of the predictor produced a prediction (numbered as the paper's
  // predictor figure numbers them).
  typedef enum logic [1:0] {
    PC_NONE       = 2'd0,
    PC_MPPP_ONLY  = 2'd1,  // bloom filter not warmed up: use MPPP alone
    PC_BOTH_AGREE = 2'd2,  // warmed up, load high: alive = Seen & !MPPP_Dead
    PC_EITHER     = 2'd3   // warmed up, load low:  alive = Seen | !MPPP_Dead
  } pred_case_e;

  // Why the load balancer chose what it chose.
  typedef enum logic [2:0] {
    LB_DRAM_DEAD   = 3'd0,  // predicted dead
    LB_DRAM_NOIDLE = 3'd1,  // no idle core to lend its L2
    LB_UP_CRIT     = 3'd2,  // critical block: always sent up
    LB_UP_CHANCE   = 3'd3,  // non-critical block: random draw won
    LB_DRAM_CHANCE = 3'd4   // non-critical block: random draw lost
  } lb_reason_e;

  // One LLC eviction as it enters the harvester.
  typedef struct packed {
    logic [BLK_ADDR_W-1:0] addr;       // block address (byte address / 64)
    logic [LINE_W-1:0]     data;
    logic                  dirty;
    logic [CORE_W-1:0]     owner;      // core whose application brought the block in
    logic                  mppp_dead;  // LLC dead-block predictor verdict
  } evict_t;

  // Event counters kept by the harvester.
  typedef struct packed {
    logic [31:0] evictions;     // LLC evictions accepted
    logic [31:0] pred_dead;     // predicted dead
    logic [31:0] no_idle;       // alive, but no idle core
    logic [31:0] up_critical;   // chosen for write-up as critical blocks
    logic [31:0] up_chance;     // chosen for write-up by the random draw
    logic [31:0] chance_lost;   // non-critical, random draw lost
    logic [31:0] snoop_present; // write-up cancelled: block already in a private cache
    logic [31:0] writeups;      // WriteUps issued to a lender L2
    logic [31:0] writebacks;    // dirty blocks written to memory
    logic [31:0] clean_drops;   // clean blocks dropped (memory already holds them)
  } hv_stats_t;

endpackage
