// config_evaluator: time and energy estimate of one candidate cache size.
//
// Given a candidate number of active colors c, this combinational datapath
// estimates what the last interval would have cost had c colors been active.
//
//  * Misses and load misses at c come from the five profiling units, which
//    measured sizes N, N/2, N/4, N/8 and N/16 colors; between two measured sizes
//    the count is interpolated linearly (the sizes are powers of two apart, so
//    the division is a shift) and scaled by the sampling ratio.
//  * Time (CPI-stack method): memory-stall cycles are taken to grow linearly with
//    load misses, so T(c) = T + k * (LM(c) - LM(c_cur)), where T is the measured
//    interval length and k = stall cycles / LM(c_cur), supplied in Q8 fixed
//    point as k_fx.
//  * Energy, in pJ: LLC leakage T(c) * c/N * 370 pJ/cycle; DRAM leakage
//    T(c) * 90 pJ/cycle; LLC dynamic energy (hits x 0.423 nJ, misses x 0.085 nJ,
//    writes x 0.688 nJ, a fill being a write); DRAM dynamic energy 70 nJ per
//    miss and per block written back or re-fetched because of turning colors
//    off; 2 pJ per block transition for every color switched on or off.
//    Turning p colors off costs p * (nDirty + nClean/2) / c_cur extra DRAM
//    accesses (dirty blocks written back, half of the discarded clean blocks
//    assumed to be fetched again); that per-color figure arrives in Q8 as dpc_fx.
//
// The paper gives the time and energy model and its constants; the linear
// interpolation between profiled sizes, the fixed-point formats and counting
// fills as writes are this design's choices. Outputs are valid in the same cycle
// as the inputs (pure combinational logic, 64-bit arithmetic).
module config_evaluator #(
  parameter int unsigned N_COLORS       = llc_pkg::N_COLORS,
  parameter int unsigned N_PROF         = llc_pkg::N_PROF,
  parameter int unsigned SAMPLING_RATIO = llc_pkg::SAMPLING_RATIO,
  parameter int unsigned WAYS           = llc_pkg::LLC_WAYS,
  localparam int unsigned CW            = $clog2(N_COLORS),
  localparam int unsigned BLOCKS_PER_COLOR = WAYS << llc_pkg::SET_IN_PAGE_W
) (
  input  logic [CW:0]   c,
  input  logic [CW:0]   c_cur,
  input  logic [31:0]   prof_miss  [N_PROF],
  input  logic [31:0]   prof_lmiss [N_PROF],
  input  logic [31:0]   accesses,
  input  logic [31:0]   write_reqs,
  input  logic [31:0]   cycles,
  input  logic [47:0]   k_fx,
  input  logic [31:0]   dpc_fx,
  output logic [47:0]   lm_est,     // load misses at c, full-cache scale
  output logic [47:0]   t_est,      // cycles at c
  output logic [63:0]   e_est       // pJ at c
);
  import llc_pkg::*;

  // Linear interpolation of a profiled curve at `col` colors (sample scale).
  function automatic longint interp(input logic [31:0] p [N_PROF], input longint col);
    longint v;
    v = longint'(p[N_PROF-1]);
    if (col >= longint'(N_COLORS)) v = longint'(p[0]);
    else begin
      for (int j = N_PROF - 2; j >= 0; j--) begin
        longint hi_c, lo_c, hi_v, lo_v;
        hi_c = longint'(N_COLORS) >>> j;
        lo_c = longint'(N_COLORS) >>> (j + 1);
        hi_v = longint'(p[j]);
        lo_v = longint'(p[j+1]);
        if (col >= lo_c && col < hi_c)
          v = lo_v + (((hi_v - lo_v) * (col - lo_c)) >>> (CW - j - 1));
      end
    end
    return (v < 0) ? 0 : v;
  endfunction

  logic signed [63:0] lm_c, lm_cur, m_c, t_c, p_off, p_chg, extra;
  logic [63:0] e_leak_llc, e_leak_mem, e_llc, e_mem, e_tr;

  always_comb begin
    lm_c   = interp(prof_lmiss, longint'(c)) * longint'(SAMPLING_RATIO);
    lm_cur = interp(prof_lmiss, longint'(c_cur)) * longint'(SAMPLING_RATIO);
    m_c    = interp(prof_miss, longint'(c)) * longint'(SAMPLING_RATIO);
    if (m_c > longint'(accesses)) m_c = longint'(accesses);

    t_c = longint'(cycles) + ((longint'(k_fx) * (lm_c - lm_cur)) >>> 8);
    if (t_c < 1) t_c = 1;

    p_off = (c_cur > c) ? longint'(c_cur) - longint'(c) : 0;
    p_chg = (c_cur > c) ? longint'(c_cur) - longint'(c) : longint'(c) - longint'(c_cur);
    extra = (p_off * longint'(dpc_fx)) >>> 8;

    e_leak_llc = (longint'(t_c) * longint'(c) * LLC_LEAK_PJ_CYC) >> CW;
    e_leak_mem = longint'(t_c) * MEM_LEAK_PJ_CYC;
    e_llc      = (longint'(accesses) - m_c) * E_HIT_PJ + m_c * E_MISS_PJ
               + (longint'(write_reqs) + m_c) * E_WRITE_PJ;
    e_mem      = (m_c + extra) * MEM_ACCESS_PJ;
    e_tr       = p_chg * longint'(BLOCKS_PER_COLOR) * TRANSITION_PJ;

    lm_est = 48'(lm_c);
    t_est  = 48'(t_c);
    e_est  = e_leak_llc + e_leak_mem + e_llc + e_mem + e_tr;
  end
endmodule
