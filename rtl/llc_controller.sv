// llc_controller: the colored, power-gated RRAM last-level cache.
//
// An 8-way, 64-byte-block cache of N_COLORS x 64 sets (8 MB at the defaults)
// whose set index does not come from the address alone: the requester supplies
// req_set = {color, page-offset set bits} from the region-to-color mapping
// table, so each memory region lives in the 64 sets of its color. Because the
// color is not a function of the address, the tag is the whole physical page
// number. Every set row (valid, dirty, LRU ages, tags of all ways) is one entry
// of the tag memory; data live in the RRAM macro model (rram_data_array),
// indexed {set, way}, and the macro's per-color power-gate enables are
// color_active.
//
// Requests (req_valid/req_ready, one outstanding) are either loads/reads
// (returning a line) or full-line writes (write-backs from the level above).
// A hit reads or writes the macro (13 or 44 cycles); a miss evicts the LRU way
// (an invalid way first), writing a dirty victim back to main memory, then for a
// read fetches the line from memory and writes it into the macro, for a write
// allocates the line with the written data. resp_valid pulses when a request
// completes. hold stops new requests being accepted while the controller
// reconfigures the cache.
//
// The flush engine implements the turning-off of a color: flush_valid with a
// color (and, when flush_by_region is set, a region) walks the color's 64 sets
// way by way, writes dirty matching blocks back, discards clean ones, and pulses
// flush_done. Flushing by region serves the remapping of one region away from a
// still-active color. Flush requests take priority over cache requests.
//
// Side outputs feed the management hardware: prof_ev (every accepted request,
// for the profiling units), blk_ev (clean/dirty insert, evict and clean-to-dirty
// events for nClean/nDirty), cw_valid/cw_color (each write into the RRAM array,
// for the per-color write counters) and hit/miss/write-request strobes.
// After reset the controller spends one cycle per set invalidating the tags.
// Blocking operation, LRU and write-allocate without fetch are this design's
// choices; the paper fixes the organisation (8-way, 64 B, colors) and the
// flush semantics.
// Lint notes: the byte offset r_addr[5:0] is unused because requests are whole
// lines, and da_busy is unused because the FSM waits for da_done; rst_n also
// disables the assertions, which lint reports as a synchronous use of the reset.
module llc_controller #(
  parameter int unsigned N_COLORS  = llc_pkg::N_COLORS,
  parameter int unsigned N_REGIONS = llc_pkg::N_COLORS,
  parameter int unsigned WAYS      = llc_pkg::LLC_WAYS,
  parameter int unsigned PA_W      = llc_pkg::PA_W,
  parameter int unsigned LINE_W    = llc_pkg::LINE_W,
  parameter int unsigned RD_LAT    = llc_pkg::RRAM_RD_LAT,
  parameter int unsigned WR_LAT    = llc_pkg::RRAM_WR_LAT,
  localparam int unsigned CW    = $clog2(N_COLORS),
  localparam int unsigned RW    = $clog2(N_REGIONS),
  localparam int unsigned SIP_W = llc_pkg::SET_IN_PAGE_W,
  localparam int unsigned SW    = CW + SIP_W,
  localparam int unsigned SETS  = 1 << SW,
  localparam int unsigned WW    = $clog2(WAYS),
  localparam int unsigned TAG_W = PA_W - llc_pkg::PAGE_OFF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_COLORS-1:0] color_active,
  input  logic                hold,
  output logic                init_busy,
  // cache requests
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [PA_W-1:0]     req_addr,
  input  logic [SW-1:0]       req_set,
  input  logic                req_write,
  input  logic                req_load,
  input  logic [LINE_W-1:0]   req_wdata,
  output logic                resp_valid,
  output logic                resp_hit,
  output logic [LINE_W-1:0]   resp_rdata,
  // flush engine
  input  logic                flush_valid,
  output logic                flush_ready,
  input  logic [CW-1:0]       flush_color,
  input  logic                flush_by_region,
  input  logic [RW-1:0]       flush_region,
  output logic                flush_done,
  // main memory
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output llc_pkg::mem_req_t   mem_req,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_rdata,
  // events
  output llc_pkg::access_ev_t prof_ev,
  output llc_pkg::blk_ev_t    blk_ev,
  output logic                cw_valid,
  output logic [CW-1:0]       cw_color,
  output logic                st_hit,
  output logic                st_miss,
  output logic                st_wreq
);
  import llc_pkg::*;

  typedef struct packed {
    logic [WAYS-1:0]            valid;
    logic [WAYS-1:0]            dirty;
    logic [WAYS-1:0][WW-1:0]    age;
    logic [WAYS-1:0][TAG_W-1:0] tag;
  } row_t;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_HIT_RD, S_HIT_WR, S_VIC_RD, S_VIC_WB, S_ALLOC,
    S_MEM_WAIT, S_FILL_WR, S_FL_CHECK, S_FL_RD, S_FL_WB, S_FL_DONE
  } state_t;

  state_t            state, state_n;
  row_t              tag_mem [SETS];
  row_t              row, row_w;
  logic              tm_we;
  logic [SW-1:0]     cur_set, init_idx;

  logic [PA_W-1:0]   r_addr;
  logic [SW-1:0]     r_set;
  logic              r_write;
  logic [LINE_W-1:0] r_wdata, r_buf;
  logic [WW-1:0]     r_way;

  logic [CW-1:0]     f_color;
  logic              f_byreg;
  logic [RW-1:0]     f_region;
  logic [SIP_W-1:0]  f_set;
  logic [WW-1:0]     f_way;
  logic [SW-1:0]     fl_set;

  logic              hit, has_inv;
  logic [WW-1:0]     hit_way, vic_way, inv_way;

  // data macro
  logic              da_start, da_write, da_busy, da_done;
  logic [SW+WW-1:0]  da_idx;
  logic [LINE_W-1:0] da_wdata, da_rdata;

  rram_data_array #(
    .BLOCKS(SETS * WAYS), .N_COLORS(N_COLORS), .LINE_W(LINE_W),
    .RD_LAT(RD_LAT), .WR_LAT(WR_LAT)
  ) u_data (
    .clk, .rst_n, .color_pwr_en(color_active),
    .start(da_start), .write(da_write), .idx(da_idx), .wdata(da_wdata),
    .busy(da_busy), .done(da_done), .rdata(da_rdata)
  );

  assign fl_set  = {f_color, f_set};
  assign cur_set = (state inside {S_FL_CHECK, S_FL_RD, S_FL_WB}) ? fl_set : r_set;
  assign row     = tag_mem[cur_set];

  // tag compare and victim choice
  always_comb begin
    hit = 1'b0; hit_way = '0; has_inv = 1'b0; inv_way = '0; vic_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (row.valid[w] && row.tag[w] == r_addr[PA_W-1 -: TAG_W]) begin
        hit = 1'b1; hit_way = WW'(w);
      end
      if (!row.valid[w]) begin
        has_inv = 1'b1; inv_way = WW'(w);
      end
      if (row.age[w] == WW'(WAYS - 1)) vic_way = WW'(w);
    end
    if (has_inv) vic_way = inv_way;
  end

  function automatic row_t touch(row_t r, logic [WW-1:0] way);
    row_t o = r;
    for (int w = 0; w < WAYS; w++)
      if (r.age[w] < r.age[way]) o.age[w] = r.age[w] + 1'b1;
    o.age[way] = '0;
    return o;
  endfunction

  logic fl_match, fl_last;
  assign fl_match = row.valid[f_way] &&
                    (!f_byreg || row.tag[f_way][RW-1:0] == f_region);
  assign fl_last  = (f_way == WW'(WAYS - 1)) && (f_set == '1);

  always_comb begin
    state_n       = state;
    tm_we         = 1'b0;
    row_w         = row;
    req_ready     = 1'b0;
    flush_ready   = (state == S_IDLE);
    flush_done    = 1'b0;
    resp_valid    = 1'b0;
    resp_hit      = 1'b0;
    resp_rdata    = r_buf;
    mem_req_valid = 1'b0;
    mem_req       = '{write: 1'b0, addr: {r_addr[PA_W-1:BLK_OFF_W], BLK_OFF_W'(0)}, wdata: r_buf};
    da_start      = 1'b0;
    da_write      = 1'b0;
    da_idx        = {r_set, r_way};
    da_wdata      = r_wdata;
    prof_ev       = '{valid: 1'b0, load: req_load, addr: req_addr};
    blk_ev        = '0;
    cw_valid      = 1'b0;
    cw_color      = r_set[SW-1 -: CW];
    st_hit        = 1'b0;
    st_miss       = 1'b0;
    st_wreq       = 1'b0;

    unique case (state)
      S_INIT: ;
      S_IDLE: begin
        if (flush_valid) begin
          state_n = S_FL_CHECK;
        end else if (req_valid && !hold) begin
          req_ready     = 1'b1;
          prof_ev.valid = 1'b1;
          st_wreq       = req_write;
          state_n       = S_LOOKUP;
        end
      end
      S_LOOKUP: begin
        if (hit) begin
          st_hit   = 1'b1;
          da_start = 1'b1;
          da_idx   = {r_set, hit_way};
          tm_we    = 1'b1;
          row_w    = touch(row, hit_way);
          if (r_write) begin
            da_write           = 1'b1;
            row_w.dirty[hit_way] = 1'b1;
            blk_ev.clean_to_dirty = !row.dirty[hit_way];
            cw_valid           = 1'b1;
            state_n            = S_HIT_WR;
          end else begin
            state_n = S_HIT_RD;
          end
        end else begin
          st_miss = 1'b1;
          if (row.valid[vic_way] && row.dirty[vic_way]) begin
            da_start = 1'b1;
            da_idx   = {r_set, vic_way};
            state_n  = S_VIC_RD;
          end else begin
            blk_ev.clean_evict = row.valid[vic_way];
            state_n = S_ALLOC;
          end
        end
      end
      S_HIT_RD: if (da_done) begin
        resp_valid = 1'b1; resp_hit = 1'b1; resp_rdata = da_rdata; state_n = S_IDLE;
      end
      S_HIT_WR: if (da_done) begin
        resp_valid = 1'b1; resp_hit = 1'b1; state_n = S_IDLE;
      end
      S_VIC_RD: if (da_done) state_n = S_VIC_WB;
      S_VIC_WB: begin
        mem_req_valid = 1'b1;
        mem_req.write = 1'b1;
        mem_req.addr  = {row.tag[r_way], r_set[SIP_W-1:0], BLK_OFF_W'(0)};
        if (mem_req_ready) begin
          blk_ev.dirty_evict = 1'b1;
          state_n = S_ALLOC;
        end
      end
      S_ALLOC: begin
        if (r_write) begin
          da_start = 1'b1;
          da_write = 1'b1;
          tm_we    = 1'b1;
          row_w    = touch(row, r_way);
          row_w.valid[r_way] = 1'b1;
          row_w.dirty[r_way] = 1'b1;
          row_w.tag[r_way]   = r_addr[PA_W-1 -: TAG_W];
          blk_ev.dirty_ins   = 1'b1;
          cw_valid           = 1'b1;
          state_n            = S_FILL_WR;
        end else begin
          mem_req_valid = 1'b1;
          if (mem_req_ready) state_n = S_MEM_WAIT;
        end
      end
      S_MEM_WAIT: if (mem_resp_valid) begin
        da_start = 1'b1;
        da_write = 1'b1;
        da_wdata = mem_resp_rdata;
        tm_we    = 1'b1;
        row_w    = touch(row, r_way);
        row_w.valid[r_way] = 1'b1;
        row_w.dirty[r_way] = 1'b0;
        row_w.tag[r_way]   = r_addr[PA_W-1 -: TAG_W];
        blk_ev.clean_ins   = 1'b1;
        cw_valid           = 1'b1;
        state_n            = S_FILL_WR;
      end
      S_FILL_WR: if (da_done) begin
        resp_valid = 1'b1; resp_hit = 1'b0; state_n = S_IDLE;
      end
      S_FL_CHECK: begin
        da_idx = {fl_set, f_way};
        if (fl_match && row.dirty[f_way]) begin
          da_start = 1'b1;
          state_n  = S_FL_RD;
        end else begin
          if (fl_match) begin
            tm_we = 1'b1;
            row_w.valid[f_way] = 1'b0;
            row_w.dirty[f_way] = 1'b0;
            blk_ev.clean_evict = 1'b1;
          end
          if (fl_last) state_n = S_FL_DONE;
        end
      end
      S_FL_RD: if (da_done) state_n = S_FL_WB;
      S_FL_WB: begin
        mem_req_valid = 1'b1;
        mem_req.write = 1'b1;
        mem_req.addr  = {row.tag[f_way], f_set, BLK_OFF_W'(0)};
        if (mem_req_ready) begin
          tm_we = 1'b1;
          row_w.valid[f_way] = 1'b0;
          row_w.dirty[f_way] = 1'b0;
          blk_ev.dirty_evict = 1'b1;
          state_n = fl_last ? S_FL_DONE : S_FL_CHECK;
        end
      end
      S_FL_DONE: begin
        flush_done = 1'b1;
        state_n    = S_IDLE;
      end
      default: state_n = S_IDLE;
    endcase
  end

  assign init_busy = (state == S_INIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_idx <= '0;
      r_addr <= '0; r_set <= '0; r_write <= 1'b0;
      r_wdata <= '0; r_buf <= '0; r_way <= '0;
      f_color <= '0; f_byreg <= 1'b0; f_region <= '0; f_set <= '0; f_way <= '0;
    end else begin
      state <= state_n;
      if (state == S_INIT) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == SW'(SETS - 1)) state <= S_IDLE;
      end
      if (state == S_IDLE && flush_valid) begin
        f_color  <= flush_color;
        f_byreg  <= flush_by_region;
        f_region <= flush_region;
        f_set    <= '0;
        f_way    <= '0;
      end else if (req_ready) begin
        r_addr  <= req_addr;
        r_set   <= req_set;
        r_write <= req_write;
        r_wdata <= req_wdata;
      end
      if (state == S_LOOKUP) r_way <= hit ? hit_way : vic_way;
      if ((state == S_VIC_RD || state == S_FL_RD) && da_done) r_buf <= da_rdata;
      if (state == S_MEM_WAIT && mem_resp_valid) r_buf <= mem_resp_rdata;
      // flush walk
      if ((state == S_FL_CHECK && !(fl_match && row.dirty[f_way])) ||
          (state == S_FL_WB && mem_req_ready)) begin
        f_way <= f_way + 1'b1;
        if (f_way == WW'(WAYS - 1)) f_set <= f_set + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      for (int w = 0; w < WAYS; w++) begin
        tag_mem[init_idx].valid[w] <= 1'b0;
        tag_mem[init_idx].dirty[w] <= 1'b0;
        tag_mem[init_idx].age[w]   <= WW'(w);
        tag_mem[init_idx].tag[w]   <= '0;
      end
    end else if (tm_we) begin
      tag_mem[cur_set] <= row_w;
    end
  end

  a_active_color: assert property (@(posedge clk) disable iff (!rst_n)
                                   req_ready |-> color_active[req_set[SW-1 -: CW]])
    else $error("llc_controller: request mapped to a turned-off color");
  a_mem_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_req_valid && !mem_req_ready |=> mem_req_valid)
    else $error("llc_controller: memory request withdrawn before ready");
endmodule
