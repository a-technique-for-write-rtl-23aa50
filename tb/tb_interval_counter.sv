// tb_interval_counter: checks interval boundaries and the per-interval cycle
// and memory-stall counts against a counting model, with random retire
// widths (0..7 per cycle) and random stall cycles, over several intervals of
// 1000 instructions.
module tb_interval_counter;
  localparam int unsigned LEN = 1000;
  logic clk = 0, rst_n = 0;
  logic [7:0] retire_cnt;
  logic mem_stall, interval_end;
  logic [31:0] cycles, stall_cycles;
  int checks = 0, failures = 0;
  int unsigned m_insn, m_cyc, m_stall, n_int;

  interval_counter #(.INTERVAL_INSNS(LEN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    retire_cnt = 0; mem_stall = 0;
    m_insn = 0; m_cyc = 1; m_stall = 0; n_int = 0;  // one idle cycle follows reset release
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (n_int < 6) begin
      @(negedge clk);
      retire_cnt = 8'($urandom_range(0, 7));
      mem_stall  = ($urandom_range(0, 3) == 0);
      // model: this cycle's contribution
      m_insn  += retire_cnt;
      m_cyc   += 1;
      m_stall += mem_stall;
      @(posedge clk); #1;
      if (m_insn >= LEN) begin
        checks++;
        if (!interval_end || cycles != m_cyc || stall_cycles != m_stall) begin
          failures++;
          $display("FAIL interval %0d: end=%0b cycles=%0d/%0d stall=%0d/%0d",
                   n_int, interval_end, cycles, m_cyc, stall_cycles, m_stall);
        end
        m_insn -= LEN; m_cyc = 0; m_stall = 0; n_int++;
      end else begin
        checks++;
        if (interval_end) begin failures++; $display("FAIL early interval_end"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
