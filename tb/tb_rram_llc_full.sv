// tb_rram_llc_full: one complete reconfiguration interval of the cache at its
// full size (8 MB, 256 colors, 1-in-64 sampling, 15M-instruction interval),
// with every parameter of rram_llc_top at its default.
//
// The core model first writes a small working set: page p (p = 0..19, region
// and initially color p) receives 3*(p+1) line writes, so colors 0..19 end
// with distinct write counts. It then keeps reading that working set, retiring
// 16 instructions per cycle for 100 cycles between requests, until the
// interval ends. With so little data and a flat miss curve, the energy model
// favours the smallest allowed step, 256 -> 240 colors, and the endurance-aware
// policy must turn off the 16 most-written colors, 4..19. Checked: the active
// set, the 600 dirty lines of those colors written back by the flushes, every
// region remapped to an active color, and all lines reading back correctly
// afterwards (from memory for the flushed ones).
module tb_rram_llc_full;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_write, req_load, resp_valid, resp_hit;
  logic [39:0] req_addr;
  logic [511:0] req_wdata, resp_rdata, mem_resp_rdata;
  logic [7:0] retire_cnt;
  logic mem_stall, mem_req_valid, mem_req_ready, mem_resp_valid;
  llc_pkg::mem_req_t mem_req;
  logic [N-1:0] color_pwr_en;
  logic [8:0] n_active;
  logic reconfig_busy, init_busy;
  llc_pkg::reconfig_stats_t stats;
  int unsigned n_reads, n_writes, w_before;
  int checks = 0, failures = 0;

  rram_llc_top dut (.*);
  main_memory_model u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata), .n_reads, .n_writes);
  always #5 clk = ~clk;

  logic [511:0] golden [longint unsigned];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

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
    if (wr) golden[longint'(a >> 6)] = d;
    else check(resp_rdata == (golden.exists(longint'(a >> 6)) ? golden[longint'(a >> 6)]
                                                            : u_mem.pattern(a)),
               $sformatf("read data %h", a));
    @(negedge clk);
    mem_stall = 0;
  endtask

  function automatic logic [39:0] line(input int p, input int l);
    return (40'(p) << 12) | (40'(l) << 6);
  endfunction

  initial begin
    repeat (20000000) @(posedge clk);
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
    for (int p = 0; p < 20; p++)
      for (int l = 0; l < 3 * (p + 1); l++) do_req(line(p, l), 1);
    for (int p = 0; p < 20; p++)
      for (int l = 0; l < 3 * (p + 1); l++) do_req(line(p, l), 0);
    w_before = n_writes;
    while (stats.intervals == 0) begin
      int p;
      p = $urandom_range(0, 19);
      do_req(line(p, $urandom_range(0, 3 * p + 2)), 0);
      repeat (100) begin @(negedge clk); retire_cnt = 16; end
      @(negedge clk); retire_cnt = 0;
    end
    while (reconfig_busy) @(negedge clk);
    $display("after one interval: %0d active colors, %0d write-backs, %0d region moves",
             n_active, n_writes - w_before, stats.region_moves);
    check(n_active == 9'd240, $sformatf("%0d active colors, expected 240", n_active));
    for (int c = 0; c < N; c++)
      check(color_pwr_en[c] == !(c >= 4 && c <= 19), $sformatf("color %0d power %0b", c, color_pwr_en[c]));
    check(n_writes - w_before == 600, $sformatf("flush write-backs %0d, expected 600", n_writes - w_before));
    check(stats.shrinks == 1 && stats.colors_off == 16, "one shrink of 16 colors");
    for (int r = 0; r < N; r++)
      check(color_pwr_en[dut.u_map.map[r]], $sformatf("region %0d mapped to an inactive color", r));
    for (int p = 0; p < 20; p++)
      for (int l = 0; l < 3 * (p + 1); l++) do_req(line(p, l), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
