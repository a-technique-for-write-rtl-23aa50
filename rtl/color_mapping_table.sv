// color_mapping_table: the region-to-color mapping table of cache coloring.
//
// Physical pages are grouped into N_REGIONS memory regions by the low bits of
// the physical page number. Each region is mapped to exactly one cache color at
// a time; several regions may share a color. The LLC set index of an address is
// therefore {map[region], page-offset set bits}, so a region only ever uses the
// 64 sets of its color, and the controller resizes the cache by steering regions
// away from colors it turns off.
//
// Interface and timing: the lookup (address -> set index, tag) is
// combinational. A remap (wr_en, wr_region, wr_color) takes effect at the next
// edge and also moves one unit of that region's weight in the per-color region
// counts, which the controller uses to balance regions over active colors.
// find_color returns, combinationally, the lowest-numbered region currently
// mapped to that color. Reset maps region r to color r mod N_COLORS. The number
// of regions equal to the number of colors, the reset mapping, the counts and
// the find port are this design's choices; the paper only names the table.
// Lint note: only the page-number bits and the in-page set bits of lookup_addr
// are used; with N_REGIONS a multiple of N_COLORS the reset-count comparison is
// constant, which lint reports.
module color_mapping_table #(
  parameter int unsigned N_COLORS   = llc_pkg::N_COLORS,
  parameter int unsigned N_REGIONS  = llc_pkg::N_COLORS,
  parameter int unsigned PA_W       = llc_pkg::PA_W,
  localparam int unsigned CW        = $clog2(N_COLORS),
  localparam int unsigned RW        = $clog2(N_REGIONS),
  localparam int unsigned SIP_W     = llc_pkg::SET_IN_PAGE_W,
  localparam int unsigned PO_W      = llc_pkg::PAGE_OFF_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // address translation
  input  logic [PA_W-1:0]      lookup_addr,
  output logic [CW+SIP_W-1:0]  lookup_set,
  output logic [CW-1:0]        lookup_color,
  // remap port
  input  logic                 wr_en,
  input  logic [RW-1:0]        wr_region,
  input  logic [CW-1:0]        wr_color,
  // region-count read port
  input  logic [CW-1:0]        cnt_idx,
  output logic [RW:0]          cnt_val,
  // find a region mapped to a color
  input  logic [CW-1:0]        find_color,
  output logic                 find_valid,
  output logic [RW-1:0]        find_region
);
  logic [CW-1:0] map   [N_REGIONS];
  logic [RW:0]   count [N_COLORS];
  logic [RW-1:0] region;

  assign region       = lookup_addr[PO_W +: RW];
  assign lookup_color = map[region];
  assign lookup_set   = {map[region], lookup_addr[llc_pkg::BLK_OFF_W +: SIP_W]};
  assign cnt_val      = count[cnt_idx];

  always_comb begin
    find_valid  = 1'b0;
    find_region = '0;
    for (int r = N_REGIONS - 1; r >= 0; r--) begin
      if (map[r] == find_color) begin
        find_valid  = 1'b1;
        find_region = RW'(r);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REGIONS; r++) map[r] <= CW'(r % N_COLORS);
      for (int c = 0; c < N_COLORS; c++)
        count[c] <= (RW+1)'(N_REGIONS / N_COLORS + ((c < (N_REGIONS % N_COLORS)) ? 1 : 0));
    end else if (wr_en && map[wr_region] != wr_color) begin
      map[wr_region]        <= wr_color;
      count[map[wr_region]] <= count[map[wr_region]] - 1'b1;
      count[wr_color]       <= count[wr_color] + 1'b1;
    end
  end
endmodule
