// rram_data_array: behavioural model of the RRAM data macro of the LLC.
//
// This is a behavioural model, not synthesizable logic for a real part: the
// array stands for the 8 MB resistive-RAM macro (one 64-byte block per entry,
// entry index {set, way}), and its only timing is the macro's access latency
// expressed in 2 GHz core cycles: RD_LAT = 13 cycles for the 6.25 ns read and
// WR_LAT = 44 cycles for the 21.77 ns write of the 32 nm RRAM design point.
//
// Interface: start (one cycle) with write, idx and wdata begins an access; the
// macro is busy until done pulses, RD_LAT or WR_LAT cycles later. A write updates
// the entry when done pulses; a read presents rdata with done. color_pwr_en is
// the per-color power-gate enable: a color's entries are the BLOCKS/N_COLORS
// consecutive indices starting at color*BLOCKS/N_COLORS. Accessing a
// powered-off color is a protocol error (assertion), since gated cells hold no
// data. Starting an access while busy is an error too.
// Lint note: rst_n also disables the assertions, which lint reports as a
// synchronous use of the reset.
module rram_data_array #(
  parameter int unsigned BLOCKS   = llc_pkg::LLC_SIZE / (llc_pkg::LINE_W / 8),
  parameter int unsigned N_COLORS = llc_pkg::N_COLORS,
  parameter int unsigned LINE_W   = llc_pkg::LINE_W,
  parameter int unsigned RD_LAT   = llc_pkg::RRAM_RD_LAT,
  parameter int unsigned WR_LAT   = llc_pkg::RRAM_WR_LAT,
  localparam int unsigned IW      = $clog2(BLOCKS),
  localparam int unsigned CW      = $clog2(N_COLORS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_COLORS-1:0] color_pwr_en,
  input  logic                start,
  input  logic                write,
  input  logic [IW-1:0]       idx,
  input  logic [LINE_W-1:0]   wdata,
  output logic                busy,
  output logic                done,
  output logic [LINE_W-1:0]   rdata
);
  logic [LINE_W-1:0] mem [BLOCKS];
  logic [7:0]        remain;
  logic              op_write;
  logic [IW-1:0]     op_idx;
  logic [LINE_W-1:0] op_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      remain   <= '0;
      op_write <= 1'b0;
      op_idx   <= '0;
      op_wdata <= '0;
      rdata    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        op_write <= write;
        op_idx   <= idx;
        op_wdata <= wdata;
        remain   <= 8'(write ? WR_LAT - 1 : RD_LAT - 1);
      end else if (busy) begin
        if (remain == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (!op_write) rdata <= mem[op_idx];
        end else begin
          remain <= remain - 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && remain == 0 && op_write) mem[op_idx] <= op_wdata;
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("rram_data_array: access started while busy");
  a_powered: assert property (@(posedge clk) disable iff (!rst_n)
                              start |-> color_pwr_en[idx[IW-1 -: CW]])
    else $error("rram_data_array: access to a powered-off color");
endmodule
