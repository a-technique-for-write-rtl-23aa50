// profiling_unit: one set-sampled, tag-only copy of a cache of size X/2^SIZE_SHIFT.
//
// To estimate the miss count the program would see at a smaller cache size,
// auxiliary tags emulate that cache on only one set in SAMPLING_RATIO (64).
// The emulated cache has FULL_SETS >> SIZE_SHIFT sets of WAYS ways. An access is
// sampled when the low log2(SAMPLING_RATIO) bits of its set index in the
// emulated cache are zero; the remaining set-index bits pick one of the
// sampled sets, and the address bits above the set index form the tag. Each
// sampled set keeps valid bits, tags and an LRU age per way (ages stay a
// permutation of 0..WAYS-1; a miss replaces the oldest way).
//
// Five instances (SIZE_SHIFT 0..4) profile X, X/2, X/4, X/8 and X/16. Each
// counts, for the sampled sets, misses and load misses (the latter feeds the
// CPI-stack time estimate). Counts are of the sample, the consumer scales them by
// the sampling ratio. clr zeroes the counters (start of an interval); the tags
// are kept. An access is looked up and the set updated at the next edge, one
// access per cycle. After reset the block spends one cycle per sampled set
// clearing its tags (busy_init); accesses during that time are not counted.
// Sampling by the low set-index bits, LRU and the physical (uncolored) address
// are this design's choices; the paper gives the ratio and the sizes.
// Lint note: the byte offset acc_addr[5:0] is not used.
module profiling_unit #(
  parameter int unsigned SIZE_SHIFT     = 0,
  parameter int unsigned SAMPLING_RATIO = llc_pkg::SAMPLING_RATIO,
  parameter int unsigned FULL_SETS      = llc_pkg::N_COLORS * (1 << llc_pkg::SET_IN_PAGE_W),
  parameter int unsigned WAYS           = llc_pkg::LLC_WAYS,
  parameter int unsigned PA_W           = llc_pkg::PA_W,
  localparam int unsigned SETS_K = FULL_SETS >> SIZE_SHIFT,
  localparam int unsigned PSETS  = SETS_K / SAMPLING_RATIO,
  localparam int unsigned SET_W  = $clog2(SETS_K),
  localparam int unsigned SR_W   = $clog2(SAMPLING_RATIO),
  localparam int unsigned PS_W   = (PSETS > 1) ? $clog2(PSETS) : 1,
  localparam int unsigned TAG_W  = PA_W - llc_pkg::BLK_OFF_W - SET_W,
  localparam int unsigned AGE_W  = $clog2(WAYS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              acc_valid,
  input  logic              acc_load,
  input  logic [PA_W-1:0]   acc_addr,
  input  logic              clr,
  output logic              busy_init,
  output logic [31:0]       accesses,
  output logic [31:0]       misses,
  output logic [31:0]       load_misses
);
  typedef struct packed {
    logic [WAYS-1:0]             valid;
    logic [WAYS-1:0][AGE_W-1:0]  age;
    logic [WAYS-1:0][TAG_W-1:0]  tag;
  } prow_t;

  prow_t             rows [PSETS];
  logic              sampled, hit;
  logic [PS_W-1:0]   pset, init_idx;
  logic [TAG_W-1:0]  tag;
  logic [AGE_W-1:0]  hit_way, vic_way, use_way;
  prow_t             cur, nxt;

  assign sampled = acc_valid && !busy_init &&
                   (acc_addr[llc_pkg::BLK_OFF_W +: SR_W] == '0);
  assign pset    = (PSETS > 1) ? PS_W'(acc_addr[llc_pkg::BLK_OFF_W + SR_W +: PS_W]) : '0;
  assign tag     = acc_addr[PA_W-1 -: TAG_W];
  assign cur     = rows[pset];

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    vic_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (cur.valid[w] && cur.tag[w] == tag) begin
        hit     = 1'b1;
        hit_way = AGE_W'(w);
      end
      if (cur.age[w] == AGE_W'(WAYS - 1)) vic_way = AGE_W'(w);
    end
    use_way = hit ? hit_way : vic_way;
    nxt = cur;
    for (int w = 0; w < WAYS; w++)
      if (cur.age[w] < cur.age[use_way]) nxt.age[w] = cur.age[w] + 1'b1;
    nxt.age[use_way]   = '0;
    nxt.valid[use_way] = 1'b1;
    nxt.tag[use_way]   = tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_init <= 1'b1;
      init_idx  <= '0;
    end else if (busy_init) begin
      init_idx <= init_idx + 1'b1;
      if (init_idx == PS_W'(PSETS - 1)) busy_init <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (busy_init) begin
      for (int w = 0; w < WAYS; w++) begin
        rows[init_idx].valid[w] <= 1'b0;
        rows[init_idx].age[w]   <= AGE_W'(w);
        rows[init_idx].tag[w]   <= '0;
      end
    end else if (sampled) begin
      rows[pset] <= nxt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accesses    <= '0;
      misses      <= '0;
      load_misses <= '0;
    end else if (clr) begin
      accesses    <= '0;
      misses      <= '0;
      load_misses <= '0;
    end else if (sampled) begin
      accesses <= accesses + 1'b1;
      if (!hit) begin
        misses <= misses + 1'b1;
        if (acc_load) load_misses <= load_misses + 1'b1;
      end
    end
  end
endmodule
