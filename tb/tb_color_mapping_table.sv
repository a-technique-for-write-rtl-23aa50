// tb_color_mapping_table: checks the reset mapping, the set index produced for
// random addresses, random remaps against a reference table, the per-color
// region counts and the find-a-region port.
module tb_color_mapping_table;
  logic clk = 0, rst_n = 0;
  logic [39:0] lookup_addr;
  logic [13:0] lookup_set;
  logic [7:0]  lookup_color;
  logic        wr_en;
  logic [7:0]  wr_region, wr_color, cnt_idx, find_color, find_region;
  logic [8:0]  cnt_val;
  logic        find_valid;
  int checks = 0, failures = 0;
  logic [7:0] model [256];

  color_mapping_table dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic check_all();
    for (int i = 0; i < 200; i++) begin
      logic [39:0] a;
      a = 40'({$urandom(), $urandom()});
      lookup_addr = a;
      #1;
      check(lookup_set == {model[a[19:12]], a[11:6]}, $sformatf("set of %h", a));
    end
    for (int c = 0; c < 256; c++) begin
      int n, first;
      n = 0; first = -1;
      for (int r = 0; r < 256; r++) if (model[r] == 8'(c)) begin n++; if (first < 0) first = r; end
      cnt_idx = 8'(c); find_color = 8'(c);
      #1;
      check(cnt_val == 9'(n), $sformatf("count of color %0d: %0d expected %0d", c, cnt_val, n));
      check(find_valid == (n > 0) && (n == 0 || find_region == 8'(first)),
            $sformatf("find color %0d", c));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 256; r++) model[r] = 8'(r);
    wr_en = 0; wr_region = 0; wr_color = 0; cnt_idx = 0; find_color = 0; lookup_addr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    check_all();
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      wr_en = 1;
      wr_region = 8'($urandom_range(0, 255));
      wr_color  = 8'($urandom_range(0, 15));     // crowd regions into few colors
      model[wr_region] = wr_color;
      @(negedge clk);
      wr_en = 0;
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
