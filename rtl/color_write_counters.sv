// color_write_counters: one write counter per cache color, the wear record the
// endurance-aware policy sorts colors by.
//
// Every write into the RRAM array (a fill or a write-back from the upper level)
// arrives as wr_valid with the color it went to, and that color's counter is
// incremented on the next edge, saturating at all ones. A turned-off color takes
// no writes, so its count simply stays, as the paper describes. Counters are
// cumulative over the whole run and cleared only by reset (the paper keeps
// history across intervals). One combinational read port (rd_idx -> rd_cnt)
// serves the sequential hottest/coldest search. The 32-bit width is assumed.
module color_write_counters #(
  parameter int unsigned N_COLORS = llc_pkg::N_COLORS,
  parameter int unsigned CNT_W    = 32,
  localparam int unsigned CW      = $clog2(N_COLORS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  input  logic [CW-1:0]    wr_color,
  input  logic [CW-1:0]    rd_idx,
  output logic [CNT_W-1:0] rd_cnt
);
  logic [CNT_W-1:0] cnt [N_COLORS];

  assign rd_cnt = cnt[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_COLORS; i++) cnt[i] <= '0;
    end else if (wr_valid && cnt[wr_color] != '1) begin
      cnt[wr_color] <= cnt[wr_color] + 1'b1;
    end
  end
endmodule
