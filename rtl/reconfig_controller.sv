// reconfig_controller: the endurance-aware cache reconfiguration algorithm.
//
// Once per interval (interval_end) the controller freezes the cache (hold),
// takes a snapshot of the interval's statistics and runs the following steps.
//
//  1. Candidate sizes: c_cur-BETA .. c_cur+BETA active colors in steps of two
//     colors, clipped to [ALPHA, N] (ALPHA = N/16, BETA = 16).
//  2. For each candidate the config_evaluator estimates the interval time and
//     the memory-subsystem energy; the full-size estimate T(N) is made first and
//     candidates slower than T(N) by more than GAMMA_PCT (2 %) are rejected.
//  3. The remaining candidate with the least energy becomes the next size. If
//     every candidate was rejected, the largest one is taken (own choice).
//  4. Wear levelling. Colors to turn on are the inactive colors with the
//     fewest writes; they are switched on first, so that regions always have
//     somewhere to go. Colors to turn off are then the (previously) active
//     colors with the most writes. A color
//     being turned off is flushed by the LLC (dirty blocks written back, clean
//     discarded), its regions are moved to the active colors holding the fewest
//     regions, and its power-gate enable drops. If the size does not change and
//     some colors are off, phi hottest active colors are swapped for phi coldest
//     inactive ones, phi = 1 for N > C >= N/2, 2 for N/2 > C >= N/8, 3 below
//     (never more than C or N - C, own choice for the case C = ALPHA = 2).
//     A color changed in this interval is not changed back in the same one.
//  5. Region balancing (own choice of how "some regions" move to new colors):
//     while the most loaded active color holds two or more regions more than the
//     least loaded one, one of its regions is flushed from it and remapped to
//     the least loaded color.
//
// Then the profiling counters are cleared and hold drops. The estimator needs
// two divisions per interval (stall cycles per load miss, and blocks lost per
// turned-off color), done by a sequential divider. Hottest/coldest searches use
// color_extreme_finder over the write counters, region balancing uses it over
// the region counts; the two share its read port, sent out as key_idx.
//
// Interfaces: flush_* is the LLC flush handshake (flush_valid held until
// flush_ready, completion on flush_done); map_* drives the mapping table; the
// stats output counts each mechanism. An interval_end arriving while the
// controller is busy is ignored (own choice; intervals are millions of cycles).
// Lint notes: the busy outputs of the finder and the divider (f_busy, d_busy)
// are unused because the FSM waits for their done pulses; rst_n also disables
// the assertion, which lint reports as a synchronous use of the reset.
module reconfig_controller #(
  parameter int unsigned N_COLORS  = llc_pkg::N_COLORS,
  parameter int unsigned N_REGIONS = llc_pkg::N_COLORS,
  parameter int unsigned N_PROF    = llc_pkg::N_PROF,
  parameter int unsigned ALPHA     = N_COLORS / llc_pkg::ALPHA_DIV,
  parameter int unsigned BETA      = llc_pkg::BETA,
  parameter int unsigned GAMMA_PCT = llc_pkg::GAMMA_PCT,
  parameter int unsigned STEP      = llc_pkg::STEP_COLORS,
  parameter int unsigned NC_W      = 18,
  localparam int unsigned CW       = $clog2(N_COLORS),
  localparam int unsigned RW       = $clog2(N_REGIONS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // interval statistics
  input  logic                interval_end,
  input  logic [31:0]         cycles,
  input  logic [31:0]         stall_cycles,
  input  logic [31:0]         prof_miss  [N_PROF],
  input  logic [31:0]         prof_lmiss [N_PROF],
  output logic                prof_clr,
  input  logic                st_access,
  input  logic                st_wreq,
  input  logic [NC_W-1:0]     n_clean,
  input  logic [NC_W-1:0]     n_dirty,
  // cache control
  output logic [N_COLORS-1:0] color_active,
  output logic [CW:0]         n_active,
  output logic                hold,
  // key read port (write counters / region counts)
  output logic [CW-1:0]       key_idx,
  input  logic [31:0]         wcnt_val,
  input  logic [RW:0]         rcnt_val,
  // mapping table
  output logic                map_wr_en,
  output logic [RW-1:0]       map_wr_region,
  output logic [CW-1:0]       map_wr_color,
  output logic [CW-1:0]       map_find_color,
  input  logic                map_find_valid,
  input  logic [RW-1:0]       map_find_region,
  // LLC flush
  output logic                flush_valid,
  input  logic                flush_ready,
  output logic [CW-1:0]       flush_color,
  output logic                flush_by_region,
  output logic [RW-1:0]       flush_region,
  input  logic                flush_done,
  // observability
  output logic                busy,
  output llc_pkg::reconfig_stats_t stats
);
  import llc_pkg::*;

  typedef enum logic [4:0] {
    S_IDLE, S_DIV_K, S_DIV_K_W, S_DIV_D, S_DIV_D_W, S_EVAL_FULL, S_EVAL, S_DECIDE,
    S_OFF_FIND, S_OFF_FIND_W, S_OFF_FLUSH, S_OFF_FLUSH_W, S_OFF_MOVE, S_OFF_MOVE_W,
    S_ON_FIND, S_ON_FIND_W, S_BAL, S_BAL_W, S_BAL_FLUSH, S_BAL_FLUSH_W, S_FINISH
  } state_t;

  state_t state;

  // interval snapshot
  logic [31:0] s_miss [N_PROF];
  logic [31:0] s_lmiss [N_PROF];
  logic [31:0] s_cycles, s_stall, s_acc, s_wreq, acc_cnt, wreq_cnt;
  logic [NC_W-1:0] s_nclean, s_ndirty;
  logic [47:0] k_fx;
  logic [31:0] dpc_fx;

  // candidate search
  logic [CW:0]  c_cur, cand, ev_c, lo, hi, best_c, c_new;
  logic [47:0]  t_full;
  logic [63:0]  best_e;
  logic         have_best;
  logic [47:0]  lm_est, t_est;
  logic [63:0]  e_est;
  logic [CW:0]  n_off, n_on;

  // color bookkeeping
  logic [N_COLORS-1:0] locked;
  logic [CW-1:0]       x_color, bal_src, bal_dst;
  logic [RW-1:0]       r_region;

  // helpers
  logic                 f_start, f_done, f_found, f_busy, key_is_region;
  logic [N_COLORS-1:0]  f_elig;
  logic [31:0]          f_key, f_max_key, f_min_key;
  logic [CW-1:0]        f_max_c, f_min_c;
  logic                 d_start, d_done, d_busy;
  logic [47:0]          d_dividend, d_divisor, d_quot;

  assign lo = (c_cur >= (CW+1)'(ALPHA + BETA)) ? c_cur - (CW+1)'(BETA) : (CW+1)'(ALPHA);
  assign hi = (c_cur + (CW+1)'(BETA) <= (CW+1)'(N_COLORS)) ? c_cur + (CW+1)'(BETA)
                                                           : (CW+1)'(N_COLORS);

  config_evaluator #(.N_COLORS(N_COLORS), .N_PROF(N_PROF)) u_eval (
    .c(ev_c), .c_cur, .prof_miss(s_miss), .prof_lmiss(s_lmiss),
    .accesses(s_acc), .write_reqs(s_wreq), .cycles(s_cycles), .k_fx, .dpc_fx,
    .lm_est, .t_est, .e_est
  );

  color_extreme_finder #(.N_COLORS(N_COLORS), .KEY_W(32)) u_find (
    .clk, .rst_n, .start(f_start), .eligible(f_elig), .rd_idx(key_idx), .rd_key(f_key),
    .busy(f_busy), .done(f_done), .found(f_found), .max_color(f_max_c), .max_key(f_max_key),
    .min_color(f_min_c), .min_key(f_min_key)
  );

  seq_divider #(.W(48)) u_div (
    .clk, .rst_n, .start(d_start), .dividend(d_dividend), .divisor(d_divisor),
    .busy(d_busy), .done(d_done), .quotient(d_quot)
  );

  assign f_key = key_is_region ? 32'(rcnt_val) : wcnt_val;

  function automatic logic [CW:0] phi(input logic [CW:0] cc);
    if (cc >= (CW+1)'(N_COLORS / 2)) return (CW+1)'(1);
    else if (cc >= (CW+1)'(N_COLORS / 8)) return (CW+1)'(2);
    else return (CW+1)'(3);
  endfunction

  function automatic logic [15:0] inc(input logic [15:0] v);
    return (v == '1) ? v : v + 1'b1;
  endfunction

  // combinational controls
  always_comb begin
    ev_c          = cand;
    if (state == S_DIV_K) ev_c = c_cur;
    if (state == S_EVAL_FULL) ev_c = (CW+1)'(N_COLORS);
    key_is_region = state inside {S_OFF_MOVE, S_OFF_MOVE_W, S_BAL, S_BAL_W};
    f_start       = state inside {S_OFF_FIND, S_BAL} || (state == S_ON_FIND && n_on != 0) ||
                    (state == S_OFF_MOVE && map_find_valid);
    unique case (state)
      S_OFF_FIND: f_elig = color_active & ~locked;
      S_ON_FIND:  f_elig = ~color_active & ~locked;
      default:    f_elig = color_active;
    endcase
    d_start    = state inside {S_DIV_K, S_DIV_D};
    d_dividend = (state == S_DIV_K) ? 48'({s_stall, 8'h00})
                                    : 48'({(NC_W+1)'(s_ndirty) + (NC_W+1)'(s_nclean >> 1), 8'h00});
    d_divisor  = (state == S_DIV_K) ? ((lm_est == 0) ? 48'd1 : lm_est) : 48'(c_cur);
    map_find_color  = (state inside {S_OFF_MOVE, S_OFF_MOVE_W}) ? x_color : bal_src;
    map_wr_en       = (state == S_OFF_MOVE_W && f_done) || (state == S_BAL_FLUSH_W && flush_done);
    map_wr_region   = r_region;
    map_wr_color    = (state == S_OFF_MOVE_W) ? f_min_c : bal_dst;
    flush_valid     = state inside {S_OFF_FLUSH, S_BAL_FLUSH};
    flush_color     = (state == S_OFF_FLUSH) ? x_color : bal_src;
    flush_by_region = (state == S_BAL_FLUSH);
    flush_region    = (state == S_BAL_FLUSH) ? map_find_region : r_region;
    prof_clr        = (state == S_IDLE) && interval_end;
    hold            = (state != S_IDLE);
    busy            = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int k = 0; k < N_PROF; k++) begin s_miss[k] <= '0; s_lmiss[k] <= '0; end
      s_cycles <= '0; s_stall <= '0; s_acc <= '0; s_wreq <= '0;
      acc_cnt <= '0; wreq_cnt <= '0; s_nclean <= '0; s_ndirty <= '0;
      k_fx <= '0; dpc_fx <= '0;
      c_cur <= (CW+1)'(N_COLORS); cand <= '0; best_c <= '0; c_new <= '0;
      t_full <= '0; best_e <= '0; have_best <= 1'b0; n_off <= '0; n_on <= '0;
      color_active <= '1; locked <= '0;
      x_color <= '0; bal_src <= '0; bal_dst <= '0; r_region <= '0;
      stats <= '0;
    end else begin
      // interval access statistics (the controller's own counters)
      if (state == S_IDLE && interval_end) begin
        acc_cnt  <= '0;
        wreq_cnt <= '0;
      end else begin
        acc_cnt  <= acc_cnt + 32'(st_access);
        wreq_cnt <= wreq_cnt + 32'(st_wreq);
      end

      unique case (state)
        S_IDLE: if (interval_end) begin
          s_miss   <= prof_miss;
          s_lmiss  <= prof_lmiss;
          s_cycles <= cycles;
          s_stall  <= stall_cycles;
          s_acc    <= acc_cnt + 32'(st_access);
          s_wreq   <= wreq_cnt + 32'(st_wreq);
          s_nclean <= n_clean;
          s_ndirty <= n_dirty;
          locked   <= '0;
          stats.intervals <= inc(stats.intervals);
          state    <= S_DIV_K;
        end
        S_DIV_K:   state <= S_DIV_K_W;
        S_DIV_K_W: if (d_done) begin
          k_fx  <= d_quot;
          state <= S_DIV_D;
        end
        S_DIV_D:   state <= S_DIV_D_W;
        S_DIV_D_W: if (d_done) begin
          dpc_fx <= d_quot[31:0];
          state  <= S_EVAL_FULL;
        end
        S_EVAL_FULL: begin
          t_full    <= t_est;
          cand      <= lo;
          have_best <= 1'b0;
          state     <= S_EVAL;
        end
        S_EVAL: begin
          if (64'(t_est) * 100 <= 64'(t_full) * 64'(100 + GAMMA_PCT)) begin
            if (!have_best || e_est < best_e) begin
              have_best <= 1'b1;
              best_e    <= e_est;
              best_c    <= cand;
            end
          end else begin
            stats.perf_rejects <= inc(stats.perf_rejects);
          end
          if (cand + (CW+1)'(STEP) > hi) state <= S_DECIDE;
          else cand <= cand + (CW+1)'(STEP);
        end
        S_DECIDE: begin
          logic [CW:0] cn, ph;
          cn = have_best ? best_c : hi;
          c_new <= cn;
          if (cn < c_cur) begin
            n_off <= c_cur - cn; n_on <= '0;
            stats.shrinks <= inc(stats.shrinks);
          end else if (cn > c_cur) begin
            n_off <= '0; n_on <= cn - c_cur;
            stats.grows <= inc(stats.grows);
          end else if (c_cur < (CW+1)'(N_COLORS)) begin
            // never swap more colors than are active or inactive
            ph = phi(c_cur);
            if (ph > c_cur) ph = c_cur;
            if (ph > (CW+1)'(N_COLORS) - c_cur) ph = (CW+1)'(N_COLORS) - c_cur;
            n_off <= ph; n_on <= ph;
            stats.shuffles <= inc(stats.shuffles);
          end else begin
            n_off <= '0; n_on <= '0;
          end
          state <= S_ON_FIND;
        end
        // ---- turn off the hottest active colors ----
        S_OFF_FIND: state <= S_OFF_FIND_W;
        S_OFF_FIND_W: if (f_done) begin
          if (f_found) begin
            x_color <= f_max_c;
            state   <= S_OFF_FLUSH;
          end else begin
            state <= S_BAL;
          end
        end
        S_OFF_FLUSH: if (flush_ready) state <= S_OFF_FLUSH_W;
        S_OFF_FLUSH_W: if (flush_done) begin
          color_active[x_color] <= 1'b0;
          locked[x_color]       <= 1'b1;
          stats.colors_off      <= inc(stats.colors_off);
          state <= S_OFF_MOVE;
        end
        S_OFF_MOVE: begin
          if (map_find_valid) begin
            r_region <= map_find_region;
            state    <= S_OFF_MOVE_W;
          end else begin
            n_off <= n_off - 1'b1;
            state <= (n_off > 1) ? S_OFF_FIND : S_BAL;
          end
        end
        S_OFF_MOVE_W: if (f_done) begin
          stats.region_moves <= inc(stats.region_moves);
          state <= S_OFF_MOVE;
        end
        // ---- turn on the coldest inactive colors ----
        S_ON_FIND: state <= (n_on == 0) ? ((n_off == 0) ? S_BAL : S_OFF_FIND) : S_ON_FIND_W;
        S_ON_FIND_W: if (f_done) begin
          if (f_found) begin
            color_active[f_min_c] <= 1'b1;
            locked[f_min_c]       <= 1'b1;
            stats.colors_on       <= inc(stats.colors_on);
            n_on  <= n_on - 1'b1;
            state <= S_ON_FIND;
          end else begin
            state <= (n_off == 0) ? S_BAL : S_OFF_FIND;
          end
        end
        // ---- balance regions over the active colors ----
        S_BAL: state <= S_BAL_W;
        S_BAL_W: if (f_done) begin
          if (f_max_key > f_min_key + 1) begin
            bal_src <= f_max_c;
            bal_dst <= f_min_c;
            state   <= S_BAL_FLUSH;
          end else begin
            state <= S_FINISH;
          end
        end
        S_BAL_FLUSH: begin
          r_region <= map_find_region;
          if (flush_ready) state <= S_BAL_FLUSH_W;
        end
        S_BAL_FLUSH_W: if (flush_done) begin
          stats.region_moves <= inc(stats.region_moves);
          state <= S_BAL;
        end
        S_FINISH: begin
          c_cur <= c_new;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // n_active follows the power-gate enables
  always_comb begin
    n_active = '0;
    for (int i = 0; i < N_COLORS; i++) n_active += (CW+1)'(color_active[i]);
  end

  a_min_alpha: assert property (@(posedge clk) disable iff (!rst_n)
                                state == S_FINISH |-> c_new >= (CW+1)'(ALPHA))
    else $error("reconfig_controller: fewer than ALPHA colors selected");
endmodule
