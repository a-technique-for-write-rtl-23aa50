// tb_llc_controller: a small colored cache (4 colors x 64 sets x 8 ways, 8
// memory regions, region r in color r mod 4) under random reads and line
// writes, then whole-color and single-region flushes.
//
// Checked against independent models: a per-set LRU list (most recent first,
// invalid ways used first) predicts every hit and miss and every dirty
// write-back; a golden copy of memory predicts every read's data; the clean and
// dirty block counts kept from the controller's events (through
// block_state_counters) and the per-color array-write events must match the
// model; a flush must write back exactly the dirty matching blocks and leave
// the others. The hit latency (13 cycles read, 44 write, plus lookup) is
// checked too.
module tb_llc_controller;
  localparam int NC = 4, NR = 8, WAYS = 8, SETS = NC * 64;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] color_active;
  logic hold, init_busy;
  logic req_valid, req_ready, req_write, req_load;
  logic [39:0] req_addr;
  logic [7:0]  req_set;
  logic [511:0] req_wdata, resp_rdata, mem_resp_rdata;
  logic resp_valid, resp_hit;
  logic flush_valid, flush_ready, flush_by_region, flush_done;
  logic [1:0] flush_color;
  logic [2:0] flush_region;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  llc_pkg::mem_req_t mem_req;
  llc_pkg::access_ev_t prof_ev;
  llc_pkg::blk_ev_t blk_ev;
  logic cw_valid, st_hit, st_miss, st_wreq;
  logic [1:0] cw_color;
  logic [17:0] n_clean, n_dirty;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0;

  llc_controller #(.N_COLORS(NC), .N_REGIONS(NR)) dut (.*);
  main_memory_model u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata), .n_reads, .n_writes);
  block_state_counters u_bs (.clk, .rst_n, .ev(blk_ev), .n_clean, .n_dirty);
  always #5 clk = ~clk;

  // reference state
  typedef struct { longint unsigned tag; bit dirty; } ent_t;
  ent_t lru [SETS][$];
  logic [511:0] golden [longint unsigned];
  int unsigned cw_model [NC];
  int unsigned cw_seen [NC];
  int unsigned wb_model = 0;

  always @(posedge clk) if (rst_n && cw_valid) cw_seen[cw_color]++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int set_of(input logic [39:0] a);
    return int'({a[13:12], a[11:6]});        // color = region mod 4 = a[13:12]
  endfunction

  task automatic do_req(input logic [39:0] a, input bit wr);
    int s, pos, lat, nd, nc;
    bit exp_hit;
    logic [511:0] d;
    s = set_of(a);
    pos = -1;
    foreach (lru[s][i]) if (lru[s][i].tag == longint'(a[39:12])) pos = i;
    exp_hit = (pos >= 0);
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom();
    @(negedge clk);
    req_valid = 1; req_addr = a; req_set = 8'(s); req_write = wr; req_load = !wr; req_wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0; lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    // model update
    if (exp_hit) begin
      ent_t e;
      e = lru[s][pos];
      lru[s].delete(pos);
      if (wr) begin e.dirty = 1; cw_model[s / 64]++; end
      lru[s].push_front(e);
      // accept edge, one lookup cycle, the macro access, then the response cycle
      check(lat == (wr ? 46 : 15), $sformatf("hit latency %0d (write=%0b)", lat, wr));
    end else begin
      if (lru[s].size() == WAYS) begin
        ent_t v;
        v = lru[s].pop_back();
        if (v.dirty) wb_model++;
      end
      lru[s].push_front('{tag: longint'(a[39:12]), dirty: wr});
      cw_model[s / 64]++;
    end
    check(resp_hit == exp_hit, $sformatf("hit flag for %h: %0b expected %0b wr=%0b set=%0d size=%0d lat=%0d", a, resp_hit, exp_hit, wr, s, lru[s].size(), lat));
    if (wr) golden[longint'(a >> 6)] = d;
    else check(resp_rdata == (golden.exists(longint'(a >> 6)) ? golden[longint'(a >> 6)]
                                                            : u_mem.pattern(a)),
               $sformatf("read data %h", a));
    @(negedge clk);
    nd = 0; nc = 0;
    for (int i = 0; i < SETS; i++) foreach (lru[i][j]) if (lru[i][j].dirty) nd++; else nc++;
    check(n_dirty == 18'(nd) && n_clean == 18'(nc), $sformatf("nDirty %0d/%0d nClean %0d/%0d",
          n_dirty, nd, n_clean, nc));
  endtask

  task automatic do_flush(input int col, input bit byreg, input int reg_id);
    int exp_wb, w0;
    exp_wb = 0;
    for (int s = col * 64; s < col * 64 + 64; s++)
      for (int i = lru[s].size() - 1; i >= 0; i--)
        if (!byreg || lru[s][i].tag[2:0] == 3'(reg_id)) begin
          if (lru[s][i].dirty) exp_wb++;
          lru[s].delete(i);
        end
    w0 = n_writes;
    @(negedge clk);
    flush_valid = 1; flush_color = 2'(col); flush_by_region = byreg; flush_region = 3'(reg_id);
    #1;
    while (!flush_ready) begin @(negedge clk); #1; end
    @(negedge clk); flush_valid = 0;
    while (!flush_done) @(negedge clk);
    @(negedge clk);
    check(n_writes - w0 == exp_wb, $sformatf("flush write-backs %0d expected %0d", n_writes - w0, exp_wb));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    color_active = '1; hold = 0; req_valid = 0; req_addr = '0; req_set = '0; req_write = 0;
    req_load = 0; req_wdata = '0; flush_valid = 0; flush_color = 0; flush_by_region = 0;
    flush_region = 0;
    foreach (cw_model[i]) begin cw_model[i] = 0; cw_seen[i] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (init_busy) @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      logic [39:0] a;
      a = '0;
      a[11:6]  = 6'($urandom_range(0, 3));     // 4 sets per color in use
      a[14:12] = 3'($urandom_range(0, 7));     // region
      a[18:15] = 4'($urandom_range(0, 15));    // 16 pages per region and set: evictions
      do_req(a, $urandom_range(0, 2) == 0);
    end
    check(u_mem.n_writes == wb_model, $sformatf("write-backs %0d expected %0d", u_mem.n_writes, wb_model));
    for (int c = 0; c < NC; c++)
      check(cw_seen[c] == cw_model[c], $sformatf("array writes color %0d: %0d/%0d", c, cw_seen[c], cw_model[c]));
    do_flush(1, 0, 0);                 // whole color 1
    do_flush(2, 1, 6);                 // region 6 out of color 2 (regions 2 and 6 live there)
    // everything still reads back correctly after the flushes
    for (int t = 0; t < 600; t++) begin
      logic [39:0] a;
      a = '0;
      a[11:6]  = 6'($urandom_range(0, 3));
      a[14:12] = 3'($urandom_range(0, 7));
      a[18:15] = 4'($urandom_range(0, 15));
      do_req(a, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
