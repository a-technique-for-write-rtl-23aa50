// tb_profiling_unit: drives a profiling unit emulating half of a 1024-set,
// 4-way cache sampled 1-in-4 with random addresses drawn from a small pool (so
// that hits, misses and LRU replacement all occur) and compares the access,
// miss and load-miss counts after every access with a reference LRU model
// kept as one most-recently-used-first list per sampled set. Also checks that
// clr zeroes the counters without losing the tags.
module tb_profiling_unit;
  localparam int FULL = 1024, SR = 4, WAYS = 4, SHIFT = 1;
  localparam int SETS_K = FULL >> SHIFT, PSETS = SETS_K / SR;   // 512, 128
  logic clk = 0, rst_n = 0;
  logic acc_valid, acc_load, clr, busy_init;
  logic [39:0] acc_addr;
  logic [31:0] accesses, misses, load_misses;
  int checks = 0, failures = 0;
  int unsigned m_acc = 0, m_miss = 0, m_lmiss = 0;
  longint unsigned lru [PSETS][$];

  profiling_unit #(.SIZE_SHIFT(SHIFT), .SAMPLING_RATIO(SR), .FULL_SETS(FULL), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model(input logic [39:0] a, input bit ld);
    int s, pos;
    longint unsigned t;
    if (a[7:6] != 0) return;                 // not a sampled set
    s = int'(a[14:8]);                        // sampled-set index
    t = longint'(a[39:15]);                   // tag above the 9-bit set index
    m_acc++;
    pos = -1;
    foreach (lru[s][i]) if (lru[s][i] == t) pos = i;
    if (pos >= 0) lru[s].delete(pos);
    else begin
      m_miss++;
      if (ld) m_lmiss++;
      if (lru[s].size() == WAYS) void'(lru[s].pop_back());
    end
    lru[s].push_front(t);
  endtask

  initial begin
    acc_valid = 0; acc_load = 0; clr = 0; acc_addr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (busy_init) @(negedge clk);
    for (int i = 0; i < 20000; i++) begin
      logic [39:0] a;
      @(negedge clk);
      a = {$urandom(), $urandom()};
      a[39:18] = '0;                          // 8 tags per set: frequent reuse
      a[14:12] = '0;                          // 16 sampled sets in use
      if ($urandom_range(0, 3) != 0) a[7:6] = 2'b00;
      acc_valid = $urandom_range(0, 4) != 0;
      acc_load  = $urandom_range(0, 1);
      acc_addr  = a;
      clr       = (i == 10000);
      if (clr) acc_valid = 0;
      if (clr) begin m_acc = 0; m_miss = 0; m_lmiss = 0; end
      else if (acc_valid) model(a, acc_load);
      @(posedge clk); #1;
      checks++;
      if (accesses != m_acc || misses != m_miss || load_misses != m_lmiss) begin
        failures++;
        if (failures < 6) $display("FAIL at %0d: acc %0d/%0d miss %0d/%0d lmiss %0d/%0d", i,
                                   accesses, m_acc, misses, m_miss, load_misses, m_lmiss);
      end
    end
    checks++;
    if (m_miss == 0 || m_miss == m_acc) begin failures++; $display("FAIL no hit/miss mix"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
