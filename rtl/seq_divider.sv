// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// start (one cycle) latches dividend and divisor; W cycles later done pulses and
// quotient holds dividend / divisor. A zero divisor gives an all-ones quotient.
// The reconfiguration controller uses it twice per interval (memory-stall cycles
// per load miss, and dirty/clean blocks per active color), so a slow, small
// divider is enough. Helper of this design; the paper names no divider.
module seq_divider #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]         rem, dvs, quo;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  assign trial = {rem[W-1:0], quo[W-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; dvs <= '0; quo <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        quo  <= dividend;
        dvs  <= divisor;
        cnt  <= ($clog2(W+1))'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], quo[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          quotient <= trial[W] ? {quo[W-2:0], 1'b0} : {quo[W-2:0], 1'b1};
        end
      end
    end
  end
endmodule
