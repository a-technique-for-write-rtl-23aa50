// tb_block_state_counters: random insert / evict / clean-to-dirty events,
// legal for a cache (never evicting a block class that is empty), compared
// every cycle with a reference count of clean and dirty blocks.
module tb_block_state_counters;
  logic clk = 0, rst_n = 0;
  llc_pkg::blk_ev_t ev;
  logic [17:0] n_clean, n_dirty;
  int checks = 0, failures = 0;
  int m_clean = 0, m_dirty = 0;

  block_state_counters dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ev = '0;
      ev.clean_ins   = $urandom_range(0, 2) == 0;
      ev.dirty_ins   = $urandom_range(0, 3) == 0;
      ev.clean_evict = (m_clean > 2) && $urandom_range(0, 3) == 0;
      ev.dirty_evict = (m_dirty > 2) && $urandom_range(0, 4) == 0;
      ev.clean_to_dirty = (m_clean > 2) && $urandom_range(0, 4) == 0;
      m_clean += int'(ev.clean_ins) - int'(ev.clean_evict) - int'(ev.clean_to_dirty);
      m_dirty += int'(ev.dirty_ins) - int'(ev.dirty_evict) + int'(ev.clean_to_dirty);
      @(posedge clk); #1;
      checks++;
      if (n_clean != 18'(m_clean) || n_dirty != 18'(m_dirty)) begin
        failures++;
        if (failures < 5) $display("FAIL clean %0d/%0d dirty %0d/%0d", n_clean, m_clean, n_dirty, m_dirty);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
