// scp_pkg: types and default sizes shared by the SCP last-level-cache slice.
//
// SCP (secure and coherent partitioning) splits a last-level cache into
// per-security-domain tag partitions that forward-point into one shared,
// unpartitioned data pool. The constants below are the evaluated main
// configuration: 16 MiB LLC, 64-byte lines, D=8 domains with W_d=8 tag ways
// each, a 40-bit physical address, data pool N equal to the total tag count.
// Encodings of the enums (request op, page mode, coherence message) are this
// design's own choice; the paper fixes only their meaning.
package scp_pkg;

  // ---- default sizes ------------------------------------------------------
  localparam int unsigned DEF_D          = 8;        // security domains
  localparam int unsigned DEF_WD         = 8;        // tag ways per domain
  localparam int unsigned DEF_SETS       = 4096;     // 2^18 lines / (8*8) ways
  localparam int unsigned DEF_LINE_BITS  = 512;      // 64-byte line
  localparam int unsigned DEF_LADDR_BITS = 34;       // 40-bit PA - 6 offset bits
  localparam int unsigned DEF_HIT_LAT    = 20;       // LLC hit latency, cycles
  localparam int unsigned DEF_T_MISS     = 200;      // memory-miss latency, cycles
  localparam int unsigned DEF_BF_M       = 524288;   // Bloom-filter counters
  localparam int unsigned DEF_BF_K       = 3;        // Bloom-filter hashes
  localparam int unsigned DEF_T_LEAK     = 16;       // downgrades per window
  localparam int unsigned DEF_WINDOW     = 3000000;  // 1 ms at 3 GHz
  localparam int unsigned DEF_LEAK_PAGES = 64;       // tracked pages
  localparam int unsigned PAGE_LINE_BITS = 6;        // 4 KiB page / 64 B line

  // ---- request from a domain ----------------------------------------------
  typedef enum logic [0:0] {
    OP_READ  = 1'b0,
    OP_WRITE = 1'b1
  } op_e;

  // 2-bit per-page mode delivered with each access from the TLB.
  typedef enum logic [1:0] {
    MODE_SCP      = 2'b00,   // permissive: plain MESI on shared lines
    MODE_WT       = 2'b01,   // write-through, line never in E/M
    MODE_ADAPTIVE = 2'b10,   // MESI until the leakage budget trips
    MODE_RSVD     = 2'b11    // treated as adaptive
  } page_mode_e;

  // Coherence state held in the data entry (one per line).
  typedef enum logic [1:0] {
    ST_I = 2'd0,
    ST_S = 2'd1,
    ST_E = 2'd2,
    ST_M = 2'd3
  } mesi_e;

  // Message to the private caches of the domains named in a mask.
  typedef enum logic [1:0] {
    COH_INV       = 2'd0,  // invalidate, acknowledged (S->M upgrade)
    COH_DOWNGRADE = 2'd1,  // owner E/M -> S, acknowledged
    COH_INV_POST  = 2'd2   // posted invalidate on a write-through store
  } coh_e;

  // How the slice served a request (statistics only, never returned to
  // the requesting core).
  typedef enum logic [1:0] {
    SRV_HIT     = 2'd0,    // own-partition tag hit
    SRV_FIND    = 2'd1,    // PeerProbe found the line in another partition
    SRV_MISS    = 2'd2     // true miss, filled from memory
  } serve_e;

  // Event counters the slice exports for measurement.
  typedef struct packed {
    logic [31:0] hits;          // own-partition hits
    logic [31:0] finds;         // PeerProbe found the line elsewhere
    logic [31:0] misses;        // true misses (PeerProbe found nothing)
    logic [31:0] bf_skips;      // PeerProbes whose peer tag scan was skipped
    logic [31:0] upgrades;      // acknowledged invalidations (S->M upgrade)
    logic [31:0] downgrades;    // E/M->S downgrades by another domain
    logic [31:0] wt_stores;     // write-through stores
    logic [31:0] tag_evicts;    // tag evictions
    logic [31:0] slot_frees;    // refcount reached zero
    logic [31:0] writebacks;    // dirty lines written to memory
    logic [31:0] promotions;    // pages promoted adaptive -> write-through
  } scp_stats_t;

endpackage
