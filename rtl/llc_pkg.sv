// llc_pkg: sizes, energy constants and shared types of the reconfigurable,
// write-endurance aware RRAM last-level cache.
//
// Geometry follows the evaluated configuration: an 8 MB, 8-way LLC with 64-byte
// blocks and 4 KB pages gives N = S/(P*Q) = 256 cache colors, each color being
// 64 consecutive sets (one page worth of sets) of 8 ways. Physical pages are
// grouped into memory regions by the low bits of the physical page number; a
// mapping table sends each region to one color.
//
// Energy constants are the RRAM column of the 32 nm cache model (per access, in
// pJ) and the DRAM figures; leakage powers are turned into pJ per cycle at the
// 2 GHz core clock (0.740 W -> 370 pJ/cycle, 0.18 W -> 90 pJ/cycle). The 40-bit
// physical address width and the counter widths are this design's own choice.
package llc_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned PA_W          = 40;   // physical address bits (assumed)
  localparam int unsigned BLK_OFF_W     = 6;    // 64-byte blocks
  localparam int unsigned PAGE_OFF_W    = 12;   // 4 KB pages
  localparam int unsigned SET_IN_PAGE_W = PAGE_OFF_W - BLK_OFF_W; // 6: sets per color = 64
  localparam int unsigned LLC_SIZE      = 8 * 1024 * 1024;
  localparam int unsigned LLC_WAYS      = 8;
  localparam int unsigned N_COLORS      = LLC_SIZE / ((1 << PAGE_OFF_W) * LLC_WAYS); // 256
  localparam int unsigned LINE_W        = 512;  // 64 bytes of data
  localparam int unsigned RET_W         = 8;    // retired instructions per cycle field

  // ---------------- algorithm ----------------
  localparam int unsigned INTERVAL_INSNS = 15_000_000;
  localparam int unsigned SAMPLING_RATIO = 64;
  localparam int unsigned N_PROF         = 5;   // profiled sizes X, X/2, X/4, X/8, X/16
  localparam int unsigned ALPHA_DIV      = 16;  // alpha = N/16
  localparam int unsigned BETA           = 16;
  localparam int unsigned GAMMA_PCT      = 2;
  localparam int unsigned STEP_COLORS    = 2;   // allocation granularity

  // ---------------- energy model (pJ, pJ/cycle) ----------------
  localparam longint unsigned E_HIT_PJ        = 423;
  localparam longint unsigned E_MISS_PJ       = 85;
  localparam longint unsigned E_WRITE_PJ      = 688;
  localparam longint unsigned LLC_LEAK_PJ_CYC = 370;
  localparam longint unsigned MEM_LEAK_PJ_CYC = 90;
  localparam longint unsigned MEM_ACCESS_PJ   = 70_000;
  localparam longint unsigned TRANSITION_PJ   = 2;

  // ---------------- RRAM macro latencies at 2 GHz ----------------
  localparam int unsigned RRAM_RD_LAT = 13;   // 6.25 ns
  localparam int unsigned RRAM_WR_LAT = 44;   // 21.77 ns

  // ---------------- shared types ----------------
  // One LLC access as seen by the profiling units.
  typedef struct packed {
    logic            valid;
    logic            load;
    logic [PA_W-1:0] addr;
  } access_ev_t;

  // Block-state events that keep nClean / nDirty current.
  typedef struct packed {
    logic clean_ins;
    logic dirty_ins;
    logic clean_evict;
    logic dirty_evict;
    logic clean_to_dirty;
  } blk_ev_t;

  // Request to the main-memory port.
  typedef struct packed {
    logic              write;
    logic [PA_W-1:0]   addr;
    logic [LINE_W-1:0] wdata;
  } mem_req_t;

  // Event counts of the reconfiguration controller (saturating).
  typedef struct packed {
    logic [15:0] intervals;     // intervals evaluated
    logic [15:0] shrinks;       // intervals that reduced the active colors
    logic [15:0] grows;         // intervals that increased them
    logic [15:0] shuffles;      // unchanged size: phi hottest swapped for coldest
    logic [15:0] colors_off;    // colors turned off
    logic [15:0] colors_on;     // colors turned on
    logic [15:0] region_moves;  // regions remapped to another color
    logic [15:0] perf_rejects;  // candidates rejected by the gamma bound
  } reconfig_stats_t;

endpackage
