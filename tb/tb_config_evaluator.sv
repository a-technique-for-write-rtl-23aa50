// tb_config_evaluator: compares the time and energy estimates for random miss
// curves, interval statistics and candidate sizes with the same model
// evaluated independently in floating point (interpolation between profiled
// sizes, CPI-stack time, leakage, LLC and DRAM dynamic energy, flush cost and
// transition energy). A relative tolerance of 0.2 % plus the truncation of the
// interpolated sample counts covers the fixed-point arithmetic of the hardware. Two hand-worked cases are checked exactly.
module tb_config_evaluator;
  logic [8:0]  c, c_cur;
  logic [31:0] prof_miss [5];
  logic [31:0] prof_lmiss [5];
  logic [31:0] accesses, write_reqs, cycles, dpc_fx;
  logic [47:0] k_fx, lm_est, t_est;
  logic [63:0] e_est;
  int checks = 0, failures = 0;

  config_evaluator dut (.*);

  function automatic real interp(input logic [31:0] p [5], input real col);
    real v;
    if (col >= 256.0) return real'(p[0]);
    v = real'(p[4]);
    for (int j = 0; j < 4; j++) begin
      real hc, lc;
      hc = 256.0 / (2.0 ** j); lc = hc / 2.0;
      if (col >= lc && col < hc) v = real'(p[j+1]) + (real'(p[j]) - real'(p[j+1])) * (col - lc) / lc;
    end
    return v;
  endfunction

  // abs_tol covers the truncation of the interpolated sample counts before
  // they are scaled by the sampling ratio (up to 64 misses per estimate).
  task automatic check_close(input real got, input real exp, input real abs_tol, input string what);
    real tol;
    tol = (exp < 0 ? -exp : exp) * 0.002 + abs_tol;
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0.0f expected %0.0f", what, got, exp);
    end
  endtask

  initial begin
    // ---- hand-worked case: flat curve, shrink 256 -> 200 ----
    for (int k = 0; k < 5; k++) begin prof_miss[k] = 1000; prof_lmiss[k] = 500; end
    c = 200; c_cur = 256; accesses = 200000; write_reqs = 30000; cycles = 1000000;
    k_fx = 48'd5000; dpc_fx = 32'd2560;   // 10.0 blocks per color
    #1;
    checks++;
    if (t_est != 48'd1000000) begin failures++; $display("FAIL flat t_est %0d", t_est); end
    // 1e6*200*370/256 = 289062500 ; 1e6*90 = 90000000
    // M = 64000: (200000-64000)*423 + 64000*85 + (30000+64000)*688 = 57528000+5440000+64672000
    // DRAM: (64000 + 56*10)*70000 = 4519200000 ; transitions 56*512*2 = 57344
    checks++;
    if (e_est != 64'(289062500 + 90000000 + 57528000 + 5440000 + 64672000 + 64'd4519200000 + 57344)) begin
      failures++; $display("FAIL flat e_est %0d", e_est);
    end
    // ---- hand-worked case: interpolation at 192 between 256 (100) and 128 (300) ----
    prof_miss = '{100, 300, 700, 1500, 3000};
    prof_lmiss = '{50, 150, 350, 750, 1500};
    c = 192; c_cur = 192; #1;
    checks++;
    if (lm_est != 48'(100 * 64)) begin failures++; $display("FAIL lm_est %0d", lm_est); end

    // ---- random cases ----
    for (int t = 0; t < 3000; t++) begin
      real lmc, lmcur, mc, texp, eexp, poff, pchg, terr;
      int v;
      v = $urandom_range(0, 2000);
      for (int k = 0; k < 5; k++) begin      // mostly rising towards small sizes
        v = v + $urandom_range(0, 3000) - 300;
        if (v < 0) v = 0;
        prof_miss[k]  = 32'(v);
        prof_lmiss[k] = 32'(v * $urandom_range(20, 90) / 100);
      end
      c_cur      = 9'(2 * $urandom_range(8, 128));
      c          = 9'(2 * $urandom_range(8, 128));
      cycles     = $urandom_range(1000000, 50000000);
      accesses   = 32'(64 * v + $urandom_range(0, 5000000));
      write_reqs = $urandom_range(0, 1000000);
      k_fx       = 48'($urandom_range(0, 100 * 256));
      dpc_fx     = $urandom_range(0, 512 * 256);
      #1;
      lmc   = interp(prof_lmiss, real'(c)) * 64.0;
      lmcur = interp(prof_lmiss, real'(c_cur)) * 64.0;
      mc    = interp(prof_miss, real'(c)) * 64.0;
      if (mc > real'(accesses)) mc = real'(accesses);
      texp  = real'(cycles) + real'(k_fx) / 256.0 * (lmc - lmcur);
      if (texp < 1.0) texp = 1.0;
      poff  = (c_cur > c) ? real'(c_cur - c) : 0.0;
      pchg  = (c_cur > c) ? real'(c_cur - c) : real'(c - c_cur);
      eexp  = texp * real'(c) / 256.0 * 370.0 + texp * 90.0
            + (real'(accesses) - mc) * 423.0 + mc * 85.0 + (real'(write_reqs) + mc) * 688.0
            + (mc + poff * real'(dpc_fx) / 256.0) * 70000.0 + pchg * 512.0 * 2.0;
      terr = 2.0 * 64.0 * (real'(k_fx) / 256.0 + 1.0);
      check_close(real'(t_est), texp, terr, $sformatf("t_est c=%0d cur=%0d", c, c_cur));
      check_close(real'(e_est), eexp, 2.0 * 64.0 * 71000.0 + terr * 460.0, $sformatf("e_est c=%0d cur=%0d", c, c_cur));
      check_close(real'(lm_est), lmc, 64.0, "lm_est");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
