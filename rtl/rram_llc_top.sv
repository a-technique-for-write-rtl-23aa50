// rram_llc_top: an 8 MB RRAM last-level cache that resizes itself per interval
// to save leakage energy while spreading writes evenly over its colors.
//
// Structure. Requests from the level above are translated by the region-to-
// color mapping table (color_mapping_table) into a set of the colored cache
// (llc_controller with its RRAM data macro). Every accepted request is also
// shown to five set-sampled profiling units emulating caches of 8, 4, 2, 1 and
// 0.5 MB. Writes into the array are counted per color (color_write_counters),
// clean and dirty blocks are counted without scanning (block_state_counters),
// and the core reports retired instructions and memory-stall cycles
// (interval_counter). At the end of each 15M-instruction interval the
// reconfig_controller picks the next number of active colors from the profiled
// miss curves, turns off the most-written colors or turns on the least-written
// ones (or swaps a few when the size stays the same), flushing and remapping as
// needed, and drives the per-color power-gate enables color_pwr_en.
//
// Interfaces. Cache request/response: valid/ready request with address, write
// flag (full-line write from above), load flag (demand load, used for the
// CPI-stack estimate) and line data; resp_valid pulses when a request
// completes. Main memory: valid/ready request carrying an llc_pkg::mem_req_t,
// read data returned with mem_resp_valid, in order. retire_cnt and mem_stall
// come from the core every cycle. Requests are not accepted while the tag
// memory initialises after reset (one cycle per set) or while the cache is
// being reconfigured (reconfig_busy).
// Lint notes: lookup_color, the hit/miss strobes and the profiling units'
// access counts are left unused here (the estimator derives hits from the access
// count and the profiled misses); they stay as named nets for waveform debugging.
module rram_llc_top #(
  parameter int unsigned N_COLORS       = llc_pkg::N_COLORS,
  parameter int unsigned INTERVAL_INSNS = llc_pkg::INTERVAL_INSNS,
  parameter int unsigned SAMPLING_RATIO = llc_pkg::SAMPLING_RATIO,
  localparam int unsigned PA_W   = llc_pkg::PA_W,
  localparam int unsigned LINE_W = llc_pkg::LINE_W,
  localparam int unsigned CW     = $clog2(N_COLORS),
  localparam int unsigned SW     = CW + llc_pkg::SET_IN_PAGE_W,
  localparam int unsigned N_PROF = llc_pkg::N_PROF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // requests from the level above
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [PA_W-1:0]      req_addr,
  input  logic                 req_write,
  input  logic                 req_load,
  input  logic [LINE_W-1:0]    req_wdata,
  output logic                 resp_valid,
  output logic                 resp_hit,
  output logic [LINE_W-1:0]    resp_rdata,
  // core progress (CPI stack)
  input  logic [llc_pkg::RET_W-1:0] retire_cnt,
  input  logic                 mem_stall,
  // main memory
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output llc_pkg::mem_req_t    mem_req,
  input  logic                 mem_resp_valid,
  input  logic [LINE_W-1:0]    mem_resp_rdata,
  // power gating and status
  output logic [N_COLORS-1:0]  color_pwr_en,
  output logic [CW:0]          n_active,
  output logic                 reconfig_busy,
  output logic                 init_busy,
  output llc_pkg::reconfig_stats_t stats
);
  import llc_pkg::*;

  logic               interval_end;
  logic [31:0]        iv_cycles, iv_stall;
  logic [SW-1:0]      req_set;
  logic [CW-1:0]      lookup_color;
  access_ev_t         prof_ev;
  blk_ev_t            blk_ev;
  logic               cw_valid, st_hit, st_miss, st_wreq, hold;
  logic [CW-1:0]      cw_color, key_idx;
  logic [31:0]        wcnt_val;
  logic [CW:0]        rcnt_val;
  logic [17:0]        n_clean, n_dirty;
  logic [31:0]        p_acc [N_PROF];
  logic [31:0]        p_miss [N_PROF];
  logic [31:0]        p_lmiss [N_PROF];
  logic [N_PROF-1:0]  p_busy;
  logic               prof_clr, llc_init;
  logic               map_wr_en, map_find_valid;
  logic [CW-1:0]      map_wr_region, map_wr_color, map_find_color, map_find_region;
  logic               flush_valid, flush_ready, flush_by_region, flush_done;
  logic [CW-1:0]      flush_color, flush_region;

  interval_counter #(.INTERVAL_INSNS(INTERVAL_INSNS)) u_interval (
    .clk, .rst_n, .retire_cnt, .mem_stall,
    .interval_end, .cycles(iv_cycles), .stall_cycles(iv_stall)
  );

  color_mapping_table #(.N_COLORS(N_COLORS), .N_REGIONS(N_COLORS)) u_map (
    .clk, .rst_n, .lookup_addr(req_addr), .lookup_set(req_set), .lookup_color,
    .wr_en(map_wr_en), .wr_region(map_wr_region), .wr_color(map_wr_color),
    .cnt_idx(key_idx), .cnt_val(rcnt_val),
    .find_color(map_find_color), .find_valid(map_find_valid), .find_region(map_find_region)
  );

  llc_controller #(.N_COLORS(N_COLORS), .N_REGIONS(N_COLORS)) u_llc (
    .clk, .rst_n, .color_active(color_pwr_en), .hold(hold || p_busy != '0),
    .init_busy(llc_init),
    .req_valid, .req_ready, .req_addr, .req_set, .req_write, .req_load, .req_wdata,
    .resp_valid, .resp_hit, .resp_rdata,
    .flush_valid, .flush_ready, .flush_color, .flush_by_region, .flush_region, .flush_done,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_rdata,
    .prof_ev, .blk_ev, .cw_valid, .cw_color, .st_hit, .st_miss, .st_wreq
  );

  for (genvar k = 0; k < N_PROF; k++) begin : g_prof
    profiling_unit #(
      .SIZE_SHIFT(k), .SAMPLING_RATIO(SAMPLING_RATIO),
      .FULL_SETS(N_COLORS << llc_pkg::SET_IN_PAGE_W)
    ) u_prof (
      .clk, .rst_n, .acc_valid(prof_ev.valid), .acc_load(prof_ev.load), .acc_addr(prof_ev.addr),
      .clr(prof_clr), .busy_init(p_busy[k]),
      .accesses(p_acc[k]), .misses(p_miss[k]), .load_misses(p_lmiss[k])
    );
  end

  color_write_counters #(.N_COLORS(N_COLORS)) u_wcnt (
    .clk, .rst_n, .wr_valid(cw_valid), .wr_color(cw_color),
    .rd_idx(key_idx), .rd_cnt(wcnt_val)
  );

  block_state_counters #(.CNT_W(18)) u_bstate (
    .clk, .rst_n, .ev(blk_ev), .n_clean, .n_dirty
  );

  reconfig_controller #(.N_COLORS(N_COLORS), .N_REGIONS(N_COLORS), .N_PROF(N_PROF)) u_ctrl (
    .clk, .rst_n,
    .interval_end, .cycles(iv_cycles), .stall_cycles(iv_stall),
    .prof_miss(p_miss), .prof_lmiss(p_lmiss), .prof_clr,
    .st_access(prof_ev.valid), .st_wreq, .n_clean, .n_dirty,
    .color_active(color_pwr_en), .n_active, .hold,
    .key_idx, .wcnt_val, .rcnt_val,
    .map_wr_en, .map_wr_region, .map_wr_color,
    .map_find_color, .map_find_valid, .map_find_region,
    .flush_valid, .flush_ready, .flush_color, .flush_by_region, .flush_region, .flush_done,
    .busy(reconfig_busy), .stats
  );

  assign init_busy = llc_init || (p_busy != '0);
endmodule
