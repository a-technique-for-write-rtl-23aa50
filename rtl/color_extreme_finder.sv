// color_extreme_finder: finds the hottest and the coldest eligible color.
//
// The endurance-aware policy turns off the active colors with the most writes
// and turns on the inactive colors with the fewest; the region balancer needs
// the active colors holding the most and the fewest regions. Both are "extreme
// key among an eligible subset of colors" searches. Because N_COLORS is small
// (256) and the search runs once per color change in an interval of millions of
// instructions, this block scans sequentially: start (one cycle) latches the
// eligible mask, then one color per cycle is read through rd_idx/rd_key, and
// N_COLORS+1 cycles after start done pulses with the maximum and the minimum
// key and their colors (lowest color number on ties). found is low when no
// color was eligible. The sequential scan is this design's choice; the paper
// only notes that sorting colors costs little.
module color_extreme_finder #(
  parameter int unsigned N_COLORS = llc_pkg::N_COLORS,
  parameter int unsigned KEY_W    = 32,
  localparam int unsigned CW      = $clog2(N_COLORS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N_COLORS-1:0] eligible,
  output logic [CW-1:0]       rd_idx,
  input  logic [KEY_W-1:0]    rd_key,
  output logic                busy,
  output logic                done,
  output logic                found,
  output logic [CW-1:0]       max_color,
  output logic [KEY_W-1:0]    max_key,
  output logic [CW-1:0]       min_color,
  output logic [KEY_W-1:0]    min_key
);
  logic [N_COLORS-1:0] elig_q;
  logic                last;

  assign last = (rd_idx == CW'(N_COLORS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      elig_q <= '0; rd_idx <= '0; busy <= 1'b0; done <= 1'b0; found <= 1'b0;
      max_color <= '0; max_key <= '0; min_color <= '0; min_key <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        elig_q <= eligible;
        rd_idx <= '0;
        busy   <= 1'b1;
        found  <= 1'b0;
      end else if (busy) begin
        if (elig_q[rd_idx]) begin
          found <= 1'b1;
          if (!found || rd_key > max_key) begin
            max_key   <= rd_key;
            max_color <= rd_idx;
          end
          if (!found || rd_key < min_key) begin
            min_key   <= rd_key;
            min_color <= rd_idx;
          end
        end
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          rd_idx <= rd_idx + 1'b1;
        end
      end
    end
  end
endmodule
