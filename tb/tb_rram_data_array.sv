// tb_rram_data_array: writes and reads random blocks of a small array and
// checks the data and the access latencies (44 cycles write, 13 cycles read,
// the RRAM macro's 21.77 ns and 6.25 ns at 2 GHz).
module tb_rram_data_array;
  logic clk = 0, rst_n = 0;
  logic start, write, busy, done;
  logic [9:0] idx;
  logic [511:0] wdata, rdata;
  logic [15:0] pwr;
  logic [511:0] model [1024];
  bit written [1024];
  int checks = 0, failures = 0;

  rram_data_array #(.BLOCKS(1024), .N_COLORS(16)) dut (
    .clk, .rst_n, .color_pwr_en(pwr), .start, .write, .idx, .wdata, .busy, .done, .rdata);
  always #5 clk = ~clk;

  task automatic access(input bit wr, input int i, input logic [511:0] d, output int lat);
    @(negedge clk);
    start = 1; write = wr; idx = 10'(i); wdata = d;
    @(negedge clk);
    start = 0; lat = 0;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    start = 0; write = 0; idx = 0; wdata = '0; pwr = '1;
    foreach (written[i]) written[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int i;
      i = $urandom_range(0, 1023);
      if ($urandom_range(0, 1) == 0 || !written[i]) begin
        logic [511:0] d;
        for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom();
        access(1, i, d, lat);
        model[i] = d; written[i] = 1;
        checks++; if (lat != 44) begin failures++; $display("FAIL write latency %0d", lat); end
      end else begin
        access(0, i, '0, lat);
        checks++; if (lat != 13) begin failures++; $display("FAIL read latency %0d", lat); end
        checks++; if (rdata != model[i]) begin failures++; $display("FAIL data at %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
