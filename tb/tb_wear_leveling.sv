// tb_wear_leveling: long-run wear levelling of the RRAM array, the property the
// lifetime metric rests on (lifetime is set by the most-written location).
//
// The whole cache runs at 32 colors, 1-in-4 sampling and 100,000-instruction
// intervals under a write-heavy small working set: 6 pages, half of the requests
// full-line writes. The controller soon shrinks the cache to its minimum of two
// colors; without wear levelling, every later array write would land on those
// two colors. With it, the two active colors are swapped for the coldest idle
// ones each interval, so the writes travel around the array.
//
// After 24 intervals the testbench reads every color's write counter and checks:
//  * the counters add up to the array writes seen on the counter update port;
//  * at least 3/4 of the colors have been written;
//  * the most-written color holds at most 1/4 of all writes, against the 1/2 or
//    more that two fixed colors would hold;
//  * every read returned the right data throughout.
// The lifetime gain over two fixed colors, (writes / 2) / max writes per color,
// is printed.
module tb_wear_leveling;
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
  longint unsigned arr_writes = 0;

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

  always @(posedge clk) if (rst_n && dut.cw_valid) arr_writes++;

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
    mem_stall = 0;
    repeat (100) begin @(negedge clk); retire_cnt = 1; end
    @(negedge clk);
    retire_cnt = 0;
  endtask

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned sum, wmax;
    int touched;
    req_valid = 0; req_addr = '0; req_write = 0; req_load = 0; req_wdata = '0;
    retire_cnt = 0; mem_stall = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (init_busy) @(negedge clk);
    while (stats.intervals < 24) begin
      logic [39:0] a;
      a = '0;
      a[21:12] = 10'($urandom_range(0, 5));
      a[11:6]  = 6'($urandom_range(0, 63));
      do_req(a, $urandom_range(0, 1) == 0);
    end
    while (reconfig_busy) @(negedge clk);
    sum = 0; wmax = 0; touched = 0;
    for (int c = 0; c < N; c++) begin
      longint unsigned w;
      w = longint'(dut.u_wcnt.cnt[c]);
      sum += w;
      if (w > wmax) wmax = w;
      if (w > 0) touched++;
    end
    $display("array writes %0d, colors written %0d of %0d, most-written color %0d, shuffles %0d",
             sum, touched, N, wmax, stats.shuffles);
    $display("lifetime gain over two fixed colors: %0d.%02d", (sum / 2) / wmax, ((sum * 50) / wmax) % 100);
    check(sum == arr_writes, $sformatf("counters sum %0d, array writes %0d", sum, arr_writes));
    check(touched >= N * 3 / 4, $sformatf("only %0d colors written", touched));
    check(wmax * 4 <= sum, $sformatf("most-written color has %0d of %0d writes", wmax, sum));
    check(stats.shuffles >= 10, $sformatf("only %0d shuffles", stats.shuffles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
