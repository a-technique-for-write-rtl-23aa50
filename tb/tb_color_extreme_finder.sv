// tb_color_extreme_finder: random keys and random eligible masks (including an
// empty one); checks max/min color and key against a direct search (lowest
// color on ties) and that done comes N_COLORS+1 cycles after start.
module tb_color_extreme_finder;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, found;
  logic [N-1:0] eligible;
  logic [4:0] rd_idx, max_color, min_color;
  logic [31:0] rd_key, max_key, min_key;
  logic [31:0] keys [N];
  int checks = 0, failures = 0;

  color_extreme_finder #(.N_COLORS(N), .KEY_W(32)) dut (.*);
  assign rd_key = keys[rd_idx];
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; eligible = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int emax, emin, mc, nc, cyc;
      bit any;
      foreach (keys[i]) keys[i] = $urandom_range(0, 20);
      eligible = (t == 5) ? '0 : N'({$urandom(), $urandom()});
      any = 0; emax = 0; emin = 0; mc = 0; nc = 0;
      for (int i = 0; i < N; i++) if (eligible[i]) begin
        if (!any || int'(keys[i]) > emax) begin emax = keys[i]; mc = i; end
        if (!any || int'(keys[i]) < emin) begin emin = keys[i]; nc = i; end
        any = 1;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == N + 1, $sformatf("latency %0d", cyc));
      check(found == any, "found");
      if (any) begin
        check(max_color == 5'(mc) && max_key == 32'(emax), $sformatf("max %0d/%0d", max_color, mc));
        check(min_color == 5'(nc) && min_key == 32'(emin), $sformatf("min %0d/%0d", min_color, nc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
