// nvm_pkg: shared geometry, types and constants of the energy-bounded
// intermittent memory hierarchy (SRAM L1 data cache, STT-RAM last-level cache
// with backup region, PCM main memory).
//
// Geometry follows the evaluated system configuration: 64-byte blocks, a
// 16 KB 4-way L1 data cache (64 sets), a 128 KB 16-way LLC data cache
// (128 sets) and 128 MB of main memory (27-bit byte address). The 32-bit CPU
// word and the single-transfer 512-bit block bus are this design's choices.
package nvm_pkg;

  // ---- Memory system geometry (system configuration table) -------------
  localparam int unsigned ADDR_W    = 27;            // 128 MB main memory
  localparam int unsigned BLK_BYTES = 64;
  localparam int unsigned OFF_W     = $clog2(BLK_BYTES);
  localparam int unsigned BLK_W     = BLK_BYTES * 8; // 512-bit block
  localparam int unsigned WORD_W    = 32;            // CPU word (assumed)
  localparam int unsigned WORDS_PER_BLK = BLK_W / WORD_W;
  localparam int unsigned WOFF_W    = $clog2(WORDS_PER_BLK);
  localparam int unsigned BADDR_W   = ADDR_W - OFF_W; // block address

  localparam int unsigned L1_BYTES  = 16 * 1024;
  localparam int unsigned L1_WAYS   = 4;
  localparam int unsigned L1_SETS   = L1_BYTES / BLK_BYTES / L1_WAYS; // 64
  localparam int unsigned L1_IDX_W  = $clog2(L1_SETS);
  localparam int unsigned L1_WAY_W  = $clog2(L1_WAYS);
  localparam int unsigned L1_TAG_W  = BADDR_W - L1_IDX_W;

  localparam int unsigned LLC_BYTES = 128 * 1024;
  localparam int unsigned LLC_WAYS  = 16;
  localparam int unsigned LLC_SETS  = LLC_BYTES / BLK_BYTES / LLC_WAYS; // 128
  localparam int unsigned LLC_IDX_W = $clog2(LLC_SETS);
  localparam int unsigned LLC_WAY_W = $clog2(LLC_WAYS);
  localparam int unsigned LLC_TAG_W = BADDR_W - LLC_IDX_W;

  // ---- Latencies in core clock cycles (system configuration table) -----
  localparam int unsigned SRAM_RD_CYC = 1;
  localparam int unsigned SRAM_WR_CYC = 2;
  localparam int unsigned STT_RD_CYC  = 2;
  localparam int unsigned STT_WR_CYC  = 10;
  localparam int unsigned PCM_RD_CYC  = 35;
  localparam int unsigned PCM_WR_CYC  = 100;

  // ---- Dirty-block bound (K = M + N) ------------------------------------
  localparam int unsigned DEF_M    = 12;
  localparam int unsigned DEF_N    = 4;
  localparam int unsigned DEF_WC_W = 6;
  localparam int unsigned NREGS    = 32;  // architectural registers (assumed)

  typedef logic [BLK_W-1:0]    blk_t;
  typedef logic [WORD_W-1:0]   word_t;
  typedef logic [BADDR_W-1:0]  baddr_t;
  typedef logic [L1_TAG_W-1:0] l1_tag_t;

  // L1 block location, the {set,way} field kept by the DBT and the WBQ.
  typedef struct packed {
    logic [L1_IDX_W-1:0] set;
    logic [L1_WAY_W-1:0] way;
  } loc_t;

  // Block-granular request between memory levels (L1->LLC, LLC->PCM).
  typedef struct packed {
    logic   we;
    baddr_t addr;
    blk_t   data;
  } blk_req_t;

  // CPU data-side request.
  typedef struct packed {
    logic                we;
    logic [ADDR_W-1:0]   addr;   // byte address, word aligned
    word_t               wdata;
  } cpu_req_t;

  // One-cycle event pulses of the memory system, for statistics.
  typedef struct packed {
    logic dbt_insert;    // clean block became dirty, entered in the DBT
    logic dbt_replace;   // DBT full: LFW victim moved to the WBQ
    logic wc_halve;      // write counter saturated, all counters reduced
    logic wbq_stall;     // write stalled on a full WBQ (per cycle)
    logic drain_wait;    // write waits for its own block's drain (per cycle)
    logic wbq_drain;     // WBQ head written back to the LLC
    logic wbq_hit;       // write hit to a block waiting in the WBQ
    logic l1_miss;
    logic l1_dirty_evict;
    logic llc_hit;
    logic llc_miss;
    logic llc_dirty_evict;
    logic l1i_miss;      // instruction fetch missed in the L1 I-cache
    logic llci_miss;     // instruction block missed in the instruction LLC
  } events_t;

endpackage
