// block_state_counters: nClean and nDirty, the numbers of clean and dirty valid
// blocks in the LLC.
//
// As the paper prescribes, the cache is never scanned: nClean rises when a clean
// block is inserted and falls when one is evicted or flushed, nDirty likewise,
// and a write hit on a clean block moves one block from nClean to nDirty. The
// events arrive as a blk_ev_t from the LLC controller, any combination in one
// cycle, and take effect on the next clock edge. The counters are wide enough
// for every block of the cache (CNT_W = 18 for 131072 blocks, this design's
// choice) and start at zero, matching the empty cache after reset.
module block_state_counters #(
  parameter int unsigned CNT_W = 18
) (
  input  logic               clk,
  input  logic               rst_n,
  input  llc_pkg::blk_ev_t   ev,
  output logic [CNT_W-1:0]   n_clean,
  output logic [CNT_W-1:0]   n_dirty
);
  logic [CNT_W-1:0] clean_nxt, dirty_nxt;

  always_comb begin
    clean_nxt = n_clean + CNT_W'(ev.clean_ins) - CNT_W'(ev.clean_evict) - CNT_W'(ev.clean_to_dirty);
    dirty_nxt = n_dirty + CNT_W'(ev.dirty_ins) - CNT_W'(ev.dirty_evict) + CNT_W'(ev.clean_to_dirty);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_clean <= '0;
      n_dirty <= '0;
    end else begin
      n_clean <= clean_nxt;
      n_dirty <= dirty_nxt;
    end
  end
endmodule
