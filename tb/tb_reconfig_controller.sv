// tb_reconfig_controller: the reconfiguration algorithm at 64 colors (ALPHA = 4,
// BETA = 16) with the real mapping table and write counters and a model of the
// cache's flush port.
//
// The write counters are preloaded with distinct counts. A sequence of
// intervals is then presented:
//   1-4  flat miss curves: the cheapest size is always the smallest allowed, so
//        the cache shrinks 64 -> 48 -> 32 -> 16 -> 4;
//   5    flat again at the floor: the size cannot change, so phi = 3 hottest
//        active colors are swapped for the 3 coldest inactive ones;
//   6    a steep miss curve: smaller sizes are rejected by the 2 % time bound
//        and the cache grows by BETA to 20 colors.
// After each interval the active set is compared with a model that applies
// the same hottest-off / coldest-on rules to the preloaded counts, every
// turned-off color must have been flushed, no region may map to an inactive
// color and region counts over active colors must differ by at most one.
module tb_reconfig_controller;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic interval_end, prof_clr, st_access, st_wreq, hold, busy;
  logic [31:0] cycles, stall_cycles;
  logic [31:0] prof_miss [5];
  logic [31:0] prof_lmiss [5];
  logic [17:0] n_clean, n_dirty;
  logic [N-1:0] color_active;
  logic [6:0] n_active;
  logic [5:0] key_idx, map_wr_region, map_wr_color, map_find_color, map_find_region;
  logic [5:0] flush_color, flush_region;
  logic [31:0] wcnt_val;
  logic [6:0] rcnt_val;
  logic map_wr_en, map_find_valid, flush_valid, flush_ready, flush_by_region, flush_done;
  llc_pkg::reconfig_stats_t stats;
  // write counter preload port
  logic wc_wr;
  logic [5:0] wc_color;
  logic [13:0] set_unused;
  logic [5:0] color_unused;
  int checks = 0, failures = 0;

  reconfig_controller #(.N_COLORS(N), .N_REGIONS(N)) dut (.*);
  color_mapping_table #(.N_COLORS(N), .N_REGIONS(N)) u_map (
    .clk, .rst_n, .lookup_addr(40'h0), .lookup_set(set_unused[11:0]), .lookup_color(color_unused),
    .wr_en(map_wr_en), .wr_region(map_wr_region), .wr_color(map_wr_color),
    .cnt_idx(key_idx), .cnt_val(rcnt_val), .find_color(map_find_color),
    .find_valid(map_find_valid), .find_region(map_find_region));
  color_write_counters #(.N_COLORS(N)) u_wc (
    .clk, .rst_n, .wr_valid(wc_wr), .wr_color(wc_color), .rd_idx(key_idx), .rd_cnt(wcnt_val));

  always #5 clk = ~clk;

  // flush port model: accepts when idle, completes 5 cycles later
  int fl_cnt;
  bit flushed_whole [N];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin fl_cnt <= 0; flush_done <= 0; end
    else begin
      flush_done <= 0;
      if (flush_valid && flush_ready) begin
        fl_cnt <= 5;
        if (!flush_by_region) flushed_whole[flush_color] = 1;
      end else if (fl_cnt > 0) begin
        fl_cnt <= fl_cnt - 1;
        if (fl_cnt == 1) flush_done <= 1;
      end
    end
  end
  assign flush_ready = (fl_cnt == 0) && !flush_done;

  int unsigned wcount [N];
  bit m_active [N];
  bit m_locked [N];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int pick(input bit want_active, input bit hottest);
    int best;
    best = -1;
    for (int c = 0; c < N; c++)
      if (m_active[c] == want_active && !m_locked[c])
        if (best < 0 || (hottest ? wcount[c] > wcount[best] : wcount[c] < wcount[best])) best = c;
    return best;
  endfunction

  task automatic model_step(input int n_off, input int n_on);
    foreach (m_locked[c]) m_locked[c] = 0;
    for (int i = 0; i < n_on; i++) begin int c; c = pick(0, 0); m_active[c] = 1; m_locked[c] = 1; end
    for (int i = 0; i < n_off; i++) begin int c; c = pick(1, 1); m_active[c] = 0; m_locked[c] = 1; end
  endtask

  task automatic run_interval(input bit steep, input int n_off, input int n_on, input int exp_active);
    int mx, mn, lat;
    if (steep) begin
      prof_miss  = '{0, 1000, 3000, 8000, 20000};
      prof_lmiss = '{0, 1000, 3000, 8000, 20000};
    end else begin
      prof_miss  = '{100, 100, 100, 100, 100};
      prof_lmiss = '{50, 50, 50, 50, 50};
    end
    foreach (flushed_whole[c]) flushed_whole[c] = 0;
    @(negedge clk); interval_end = 1;
    @(negedge clk); interval_end = 0;
    check(hold && busy, "hold during reconfiguration");
    lat = 0;
    while (busy) begin @(negedge clk); lat++; end
    model_step(n_off, n_on);
    check(n_active == 7'(exp_active), $sformatf("active colors %0d expected %0d", n_active, exp_active));
    for (int c = 0; c < N; c++) begin
      check(color_active[c] == m_active[c], $sformatf("color %0d active %0b expected %0b", c, color_active[c], m_active[c]));
      if (!m_active[c] && m_locked[c])
        check(flushed_whole[c], $sformatf("color %0d turned off without flush", c));
    end
    mx = 0; mn = 1000;
    for (int c = 0; c < N; c++) begin
      if (color_active[c]) begin
        if (int'(u_map.count[c]) > mx) mx = int'(u_map.count[c]);
        if (int'(u_map.count[c]) < mn) mn = int'(u_map.count[c]);
      end else check(u_map.count[c] == 0, $sformatf("regions left on inactive color %0d", c));
    end
    check(mx - mn <= 1, $sformatf("region balance %0d..%0d", mn, mx));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    interval_end = 0; cycles = 32'd10_000_000; stall_cycles = 32'd4_000_000;
    st_access = 0; st_wreq = 0; n_clean = 18'd1000; n_dirty = 18'd500; wc_wr = 0; wc_color = 0;
    foreach (m_active[c]) begin m_active[c] = 1; m_locked[c] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // preload distinct write counts: color c gets ((c * 37) mod 64) + 1 writes
    for (int c = 0; c < N; c++) begin
      wcount[c] = ((c * 37) % 64) + 1;
      for (int k = 0; k < int'(wcount[c]); k++) begin
        @(negedge clk); wc_wr = 1; wc_color = 6'(c);
      end
    end
    @(negedge clk); wc_wr = 0;
    run_interval(0, 16, 0, 48);
    run_interval(0, 16, 0, 32);
    run_interval(0, 16, 0, 16);
    run_interval(0, 12, 0, 4);
    run_interval(0, 3, 3, 4);      // phi = 3 below N/8
    run_interval(1, 0, 16, 20);
    check(stats.shrinks == 4 && stats.shuffles == 1 && stats.grows == 1,
          $sformatf("stats shrink %0d shuffle %0d grow %0d", stats.shrinks, stats.shuffles, stats.grows));
    check(stats.colors_off == 63 && stats.colors_on == 19, $sformatf("colors off %0d on %0d",
          stats.colors_off, stats.colors_on));
    check(stats.perf_rejects > 0, "time bound never rejected a candidate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
