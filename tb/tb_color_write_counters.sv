// tb_color_write_counters: random writes to random colors (skewed so that a few
// colors are hot), then every counter is read back and compared with a
// reference count; a narrow instance checks saturation.
module tb_color_write_counters;
  logic clk = 0, rst_n = 0;
  logic wr_valid;
  logic [7:0] wr_color, rd_idx;
  logic [31:0] rd_cnt;
  logic [3:0]  rd_cnt_s;
  int checks = 0, failures = 0;
  int unsigned model [256];

  color_write_counters dut (.*);
  color_write_counters #(.N_COLORS(256), .CNT_W(4)) dut_sat (
    .clk, .rst_n, .wr_valid, .wr_color, .rd_idx, .rd_cnt(rd_cnt_s));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    wr_valid = 0; wr_color = 0; rd_idx = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      wr_valid = $urandom_range(0, 3) != 0;
      wr_color = ($urandom_range(0, 1) == 0) ? 8'($urandom_range(0, 7)) : 8'($urandom_range(0, 255));
      if (wr_valid) model[wr_color]++;
    end
    @(negedge clk); wr_valid = 0;
    for (int c = 0; c < 256; c++) begin
      rd_idx = 8'(c);
      #1;
      checks++;
      if (rd_cnt != model[c]) begin
        failures++;
        if (failures < 5) $display("FAIL color %0d: %0d expected %0d", c, rd_cnt, model[c]);
      end
      checks++;
      if (rd_cnt_s != 4'((model[c] > 15) ? 15 : model[c])) begin
        failures++;
        if (failures < 8) $display("FAIL saturating color %0d: %0d", c, rd_cnt_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
