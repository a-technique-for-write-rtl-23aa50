// tb_rram_llc_top: end-to-end run of the whole cache at 32 colors (2 MB, 8-way),
// 1-in-4 set sampling and 100,000-instruction intervals.
//
// A simple core model issues one LLC request at a time, stalls (mem_stall)
// while a load is outstanding and then retires 100 instructions, one per
// cycle, between requests. The workload has three phases:
//   A  a small working set (8 pages, reads and line writes) for 5 intervals:
//      the controller shrinks the cache to ALPHA = 2 colors, then, unable to
//      shrink further, shuffles phi colors each interval;
//   B  a larger working set (24 pages, three times what 2 colors hold) for 4
//      intervals: small sizes are rejected by the time bound and the cache
//      grows back;
//   C  the small working set again.
// Every read is checked against a golden copy of memory (write-backs, flushes
// and remaps must never lose or corrupt a line), every accepted request must
// map to a powered color, and each mechanism (hit, miss, dirty eviction, flush
// write-back, shrink, grow, shuffle, color off/on, region move, time-bound
// rejection, request held off during reconfiguration) must occur at least once.
module tb_rram_llc_top;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_write, req_load, resp_valid, resp_hit;
  logic [39:0] req_addr;
  logic [511:0] req_wdata, resp_rdata, mem_resp_rdata;
  logic [7:0] retire_cnt;
  logic mem_stall, mem_req_valid, mem_req_ready, mem_resp_valid;
  llc_pkg::mem_req_t mem_req;
  logic [N-1:0] color_pwr_en;
  logic [5:0] n_active;
  logic reconfig_busy, init_busy;
  llc_pkg::reconfig_stats_t stats;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0;
  int unsigned n_hit = 0, n_miss = 0, n_held = 0, min_active = 1000, fl_wb = 0;

  rram_llc_top #(.N_COLORS(N), .INTERVAL_INSNS(100000), .SAMPLING_RATIO(4)) dut (.*);
  main_memory_model u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata), .n_reads, .n_writes);
  always #5 clk = ~clk;

  logic [511:0] golden [longint unsigned];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready)
      check(color_pwr_en[dut.req_set[10:6]], "request mapped to a powered-off color");
    if (req_valid && reconfig_busy) n_held++;
    if (reconfig_busy && mem_req_valid && mem_req_ready && mem_req.write) fl_wb++;
    if (n_active < min_active) min_active = n_active;
  end
  logic busy_q = 0;
  always @(posedge clk) begin
    busy_q <= reconfig_busy;
    if (busy_q && !reconfig_busy)
      $display("interval %0d: %0d active colors (evaluated %0d, chosen %0d)", stats.intervals, n_active,
               dut.u_ctrl.c_cur, dut.u_ctrl.best_c);
  end

  task automatic do_req(input logic [39:0] a, input bit wr);
    logic [511:0] d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom();
    @(negedge clk);
    req_valid = 1; req_addr = a; req_write = wr; req_load = !wr; req_wdata = d;
    retire_cnt = 0; mem_stall = !wr;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    if (resp_hit) n_hit++; else n_miss++;
    if (wr) golden[longint'(a >> 6)] = d;
    else check(resp_rdata == (golden.exists(longint'(a >> 6)) ? golden[longint'(a >> 6)]
                                                            : u_mem.pattern(a)),
               $sformatf("read data %h", a));
    // the core then runs 100 instructions at one per cycle before its next request
    mem_stall = 0;
    repeat (100) begin @(negedge clk); retire_cnt = 1; end
    @(negedge clk);
    retire_cnt = 0;
  endtask

  task automatic phase(input int pages, input int intervals);
    int start;
    start = stats.intervals;
    while (int'(stats.intervals) < start + intervals) begin
      logic [39:0] a;
      a = '0;
      a[21:12] = 10'($urandom_range(0, pages - 1));
      a[11:6]  = 6'($urandom_range(0, 63));
      do_req(a, $urandom_range(0, 3) == 0);
    end
  endtask

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_addr = '0; req_write = 0; req_load = 0; req_wdata = '0;
    retire_cnt = 0; mem_stall = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (init_busy) @(negedge clk);
    phase(8, 5);
    check(min_active == 2, $sformatf("small working set: fewest active colors %0d, expected 2", min_active));
    phase(24, 4);
    check(n_active >= 6'd4, $sformatf("larger working set: %0d active colors, expected at least 4", n_active));
    phase(8, 2);
    $display("hits %0d misses %0d mem reads %0d writes %0d flush write-backs %0d held %0d",
             n_hit, n_miss, n_reads, n_writes, fl_wb, n_held);
    $display("intervals %0d shrinks %0d grows %0d shuffles %0d off %0d on %0d moves %0d rejects %0d",
             stats.intervals, stats.shrinks, stats.grows, stats.shuffles, stats.colors_off,
             stats.colors_on, stats.region_moves, stats.perf_rejects);
    check(n_hit > 0, "no hit");
    check(n_miss > 0, "no miss");
    check(n_writes > fl_wb, "no dirty eviction");
    check(fl_wb > 0, "no flush write-back");
    check(stats.shrinks > 0, "no shrink");
    check(stats.grows > 0, "no grow");
    check(stats.shuffles > 0, "no shuffle");
    check(stats.colors_off > 0 && stats.colors_on > 0, "no color turned off/on");
    check(stats.region_moves > 0, "no region remapped");
    check(stats.perf_rejects > 0, "no candidate rejected by the time bound");
    check(n_held > 0, "no request held during reconfiguration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
