// interval_counter: delimits the reconfiguration intervals.
//
// The management algorithm runs once per interval of INTERVAL_INSNS retired
// instructions (15M in the evaluated setup). The core reports, every cycle, how
// many instructions it retired (retire_cnt) and whether it was stalled on memory
// (mem_stall, the memory component of its CPI stack). This block accumulates
// retired instructions, cycles and memory-stall cycles; on the cycle where the
// instruction count reaches the interval length it pulses interval_end for one
// cycle and holds the finished interval's cycle and stall counts on its outputs
// until the next interval ends. Instructions past the boundary in that cycle
// are carried into the next interval. Counting is this design's choice of how
// the per-interval CPI-stack numbers reach the controller.
module interval_counter #(
  parameter int unsigned INTERVAL_INSNS = llc_pkg::INTERVAL_INSNS,
  parameter int unsigned RET_W          = llc_pkg::RET_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [RET_W-1:0] retire_cnt,
  input  logic             mem_stall,
  output logic             interval_end,
  output logic [31:0]      cycles,        // cycles of the last finished interval
  output logic [31:0]      stall_cycles   // memory-stall cycles of the last interval
);
  logic [31:0] insn_acc, cyc_acc, stall_acc;
  logic [32:0] insn_sum;

  assign insn_sum = {1'b0, insn_acc} + 33'(retire_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      insn_acc     <= '0;
      cyc_acc      <= '0;
      stall_acc    <= '0;
      interval_end <= 1'b0;
      cycles       <= '0;
      stall_cycles <= '0;
    end else begin
      interval_end <= 1'b0;
      if (insn_sum >= 33'(INTERVAL_INSNS)) begin
        interval_end <= 1'b1;
        cycles       <= cyc_acc + 32'd1;
        stall_cycles <= stall_acc + 32'(mem_stall);
        insn_acc     <= 32'(insn_sum - 33'(INTERVAL_INSNS));
        cyc_acc      <= '0;
        stall_acc    <= '0;
      end else begin
        insn_acc  <= insn_sum[31:0];
        cyc_acc   <= cyc_acc + 32'd1;
        stall_acc <= stall_acc + 32'(mem_stall);
      end
    end
  end
endmodule
